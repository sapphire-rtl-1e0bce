// butterfly: unified Cooley-Tukey / Gentleman-Sande NTT butterfly.
//
// Two modular adders, two modular subtractors and one modular multiplier, with
// multiplexers that place the multiplication before (DIT, Cooley-Tukey) or after
// (DIF, Gentleman-Sande) the add/subtract pair:
//   dif = 0:  o0 = a + w*b,  o1 = a - w*b   (mod q)
//   dif = 1:  o0 = a + b,    o1 = (a - b)*w (mod q)
// prod exposes the multiplier output so the ALU can reuse it.
// Interface: a, b, w, dif, modulus settings in; o0, o1, prod out.
// Timing: combinational; one butterfly per clock in the NTT pipeline.
module butterfly
  import sapphire_pkg::*;
(
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] w,
  input  logic         dif,
  input  logic [3:0]   qmode,
  input  logic [W-1:0] q,
  input  logic [W-1:0] m,
  input  logic [5:0]   k,
  output logic [W-1:0] o0,
  output logic [W-1:0] o1,
  output logic [W-1:0] prod
);
  logic [W-1:0] add1, sub1, mul_in, add2, sub2, sub2_in;

  // first add/subtract pair (used by DIF)
  mod_add #(.W(W)) u_add1 (.x(a), .y(b), .q(q), .z(add1));
  mod_sub #(.W(W)) u_sub1 (.x(a), .y(b), .q(q), .z(sub1));

  // multiplier: w*b (DIT) or w*(a-b) (DIF)
  assign mul_in = dif ? sub1 : b;
  mod_mul u_mul (.x(mul_in), .y(w), .qmode(qmode), .q(q), .m(m), .k(k), .z(prod));

  // second add/subtract pair (used by DIT)
  assign sub2_in = dif ? '0 : prod;
  mod_add #(.W(W)) u_add2 (.x(a), .y(sub2_in), .q(q), .z(add2));
  mod_sub #(.W(W)) u_sub2 (.x(a), .y(sub2_in), .q(q), .z(sub2));

  assign o0 = dif ? add1 : add2;
  assign o1 = dif ? prod : sub2;
endmodule
