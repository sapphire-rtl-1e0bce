// red_barrett_cfg: fully configurable single-cycle Barrett reduction.
//
// Reduces a 48-bit product z < q^2 modulo a run-time prime q (up to 24 bits),
// given m = floor(2^k / q) and the shift k. Structure as in the paper's
// configurable multiplier: a 48x24 multiplier forms z*m (72 bits), a mux of fixed
// right shifts (>>16 ... >>48) selects t = (z*m) >> k (26 bits), a third
// multiplier forms t*q (50 bits), and two subtractors give z - tq and z - tq - q;
// the borrow of the second one selects the result. k outside 16..48 is clamped.
// Interface: z, q, m, k in; r out. Timing: combinational (single cycle).
module red_barrett_cfg #(
  parameter int unsigned W = 24
) (
  input  logic [2*W-1:0] z,
  input  logic [W-1:0]   q,
  input  logic [W-1:0]   m,
  input  logic [5:0]     k,
  output logic [W-1:0]   r
);
  logic [3*W-1:0] zm;
  logic [25:0]    t;
  logic [49:0]    tq;
  logic [24:0]    d1, d2;
  logic           b2;
  logic [5:0]     kc;

  always_comb begin
    zm = z * {{(2*W){1'b0}}, m};
    kc = (k < 6'd16) ? 6'd16 : ((k > 6'd48) ? 6'd48 : k);
    t  = 26'(zm >> kc);
    tq = {24'b0, t} * {26'b0, q};
    // z - tq < 2q < 2^25: only the low 25 bits are needed
    d1 = 25'(z) - 25'(tq);
    {b2, d2} = {1'b0, d1} - {2'b0, q};
    r = b2 ? d1[W-1:0] : d2[W-1:0];
  end
endmodule
