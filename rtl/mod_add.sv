// mod_add: combinational modular adder, z = x + y mod q, for a run-time modulus q.
//
// Follows the paper's adder structure: one adder forms the (W+1)-bit sum
// (carry c, sum s) and one subtractor forms s - q (borrow b, difference d) in the
// same cycle. The result is d when c = 1 or b = 0, else s, so the time taken does
// not depend on the data. Inputs must already lie in [0, q).
// Interface: x, y, q in, z out, all W bits. Timing: purely combinational.
module mod_add #(
  parameter int unsigned W = 24
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] q,
  output logic [W-1:0] z
);
  logic         c, b;
  logic [W-1:0] s, d;

  always_comb begin
    {c, s} = {1'b0, x} + {1'b0, y};
    {b, d} = {1'b0, s} - {1'b0, q};
    z = (c || !b) ? d : s;
  end
endmodule
