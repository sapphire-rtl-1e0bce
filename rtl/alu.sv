// alu: Sapphire arithmetic and logic unit around the unified butterfly.
//
// Besides the two butterfly modes, it performs coefficient-wise modular ADD,
// SUB and MUL by reusing the butterfly's adders and multiplier (ADD/SUB are the
// DIT outputs with w = 1, MUL is the multiplier product), and the bit-wise
// operations AND, OR, XOR, right and left shift (shift amount = low 5 bits of b).
// PASSB forwards b. w_neg replaces the twiddle w by q - w (used for inverse
// transforms, where only the forward twiddles are stored).
// Interface: op, a, b, w, w_neg, modulus settings in; y0, y1 out (y1 only used by
// the butterflies). Timing: combinational.
module alu
  import sapphire_pkg::*;
(
  input  alu_op_e      op,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] w,
  input  logic         w_neg,
  input  logic [3:0]   qmode,
  input  logic [W-1:0] q,
  input  logic [W-1:0] m,
  input  logic [5:0]   k,
  output logic [W-1:0] y0,
  output logic [W-1:0] y1
);
  logic [W-1:0] wn, w_bf, a_bf, b_bf, o0, o1, prod;
  logic         dif;

  mod_sub #(.W(W)) u_neg (.x('0), .y(w), .q(q), .z(wn));

  always_comb begin
    dif  = (op == ALU_BF_DIF);
    a_bf = a;
    b_bf = b;
    w_bf = w_neg ? wn : w;
    unique case (op)
      ALU_ADD, ALU_SUB: w_bf = W'(1);
      ALU_MUL: begin a_bf = '0; w_bf = a; end
      default: ;
    endcase
  end

  butterfly u_bf (.a(a_bf), .b(b_bf), .w(w_bf), .dif(dif), .qmode(qmode), .q(q), .m(m), .k(k),
                  .o0(o0), .o1(o1), .prod(prod));

  always_comb begin
    y1 = o1;
    unique case (op)
      ALU_BF_DIT, ALU_BF_DIF, ALU_ADD: y0 = o0;
      ALU_SUB:    y0 = o1;
      ALU_MUL:    y0 = prod;
      ALU_AND:    y0 = a & b;
      ALU_OR:     y0 = a | b;
      ALU_XOR:    y0 = a ^ b;
      ALU_RSHIFT: y0 = a >> b[4:0];
      ALU_LSHIFT: y0 = a << b[4:0];
      default:    y0 = b;
    endcase
  end
endmodule
