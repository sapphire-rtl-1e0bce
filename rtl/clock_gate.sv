// clock_gate: latch-based integrated clock gate.
//
// The enable is captured by a latch that is transparent while clk is low, and
// the gated clock is clk AND the latched enable, so gclk never glitches when en
// changes during the high phase. The paper inserts such gates by hand on the
// Keccak, sampler and NTT clocks under software control (clock_config); the
// cell itself is the usual one and this is its RTL description.
// Interface: clk, en in; gclk out. Timing: en must settle before clk rises.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_l;

  always_latch
    if (!clk) en_l = en;

  assign gclk = clk & en_l;
endmodule
