// mod_sub: combinational modular subtractor, z = x - y mod q, run-time modulus q.
//
// As in the paper, the difference d (with borrow b) and the corrected value
// s = d + q are both computed every cycle; the borrow picks s, otherwise d.
// Inputs must lie in [0, q). Interface: x, y, q in, z out, W bits each.
// Timing: purely combinational.
module mod_sub #(
  parameter int unsigned W = 24
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] q,
  output logic [W-1:0] z
);
  logic         b, c;
  logic [W-1:0] d, s;

  always_comb begin
    {b, d} = {1'b0, x} - {1'b0, y};
    {c, s} = {1'b0, d} + {1'b0, q};
    z = b ? s : d;
  end
endmodule
