// red_const: Barrett reduction with q, m, k fixed at elaboration.
//
// One of the paper's dedicated reduction blocks: t = (z * M) >> K, z - t*Q,
// then one conditional subtraction of Q. The products by the constants M and Q
// are written as constant multiplications; with the paper's primes they are the
// short shift-and-add chains of its appendix (for example 7681 = 2^13 - 2^9 + 1,
// 273 = 2^8 + 2^4 + 1), which synthesis derives from the constants.
// Interface: z (< Q^2) in, r = z mod Q out. Timing: combinational.
module red_const #(
  parameter longint unsigned Q = 7681,
  parameter longint unsigned M = 273,
  parameter int unsigned     K = 21
) (
  input  logic [47:0] z,
  output logic [23:0] r
);
  logic [95:0] zm;
  logic [47:0] t;
  logic [47:0] d;

  always_comb begin
    zm = {48'b0, z} * 96'(M);
    t  = 48'(zm >> K);
    d  = z - 48'(t * 48'(Q));
    r  = (d >= 48'(Q)) ? 24'(d - 48'(Q)) : 24'(d);
  end
endmodule
