// tb_alu: self-checking test of the ALU.
//
// Runs every operation with random operands for a few dedicated primes, the
// configurable Barrett mode and a power-of-two modulus: modular ADD, SUB and
// MUL against 64-bit reference arithmetic, the two butterflies (with and
// without the negated twiddle w_neg), AND/OR/XOR, shifts by b[4:0] and PASSB.
// Combinational: checked 1 ns after each vector.
module tb_alu;
  import sapphire_pkg::*;
  alu_op_e     op;
  logic [23:0] a, b, w, q, m, y0, y1;
  logic [5:0]  k;
  logic [3:0]  qmode;
  logic        wneg;
  int checks = 0, failures = 0;

  alu dut (.op(op), .a(a), .b(b), .w(w), .w_neg(wneg), .qmode(qmode), .q(q), .m(m), .k(k),
           .y0(y0), .y1(y1));

  task automatic check(input alu_op_e o);
    longint unsigned qq, e0, e1, ww;
    logic chk1;
    qq = longint'(q);
    op = o; a = 24'($urandom % q); b = 24'($urandom % q); w = 24'($urandom % q);
    wneg = 1'($urandom);
    #1;
    ww = wneg ? (qq - longint'(w)) % qq : longint'(w);
    chk1 = 1'b0; e1 = 0;
    unique case (o)
      ALU_BF_DIT: begin
        e0 = (longint'(a) + (ww * longint'(b)) % qq) % qq;
        e1 = (longint'(a) + qq - (ww * longint'(b)) % qq) % qq; chk1 = 1'b1;
      end
      ALU_BF_DIF: begin
        e0 = (longint'(a) + longint'(b)) % qq;
        e1 = (((longint'(a) + qq - longint'(b)) % qq) * ww) % qq; chk1 = 1'b1;
      end
      ALU_ADD:    e0 = (longint'(a) + longint'(b)) % qq;
      ALU_SUB:    e0 = (longint'(a) + qq - longint'(b)) % qq;
      ALU_MUL:    e0 = (longint'(a) * longint'(b)) % qq;
      ALU_AND:    e0 = longint'(a & b);
      ALU_OR:     e0 = longint'(a | b);
      ALU_XOR:    e0 = longint'(a ^ b);
      ALU_RSHIFT: e0 = longint'(a >> b[4:0]);
      ALU_LSHIFT: e0 = longint'(24'(a << b[4:0]));
      default:    e0 = longint'(b);
    endcase
    checks++;
    if (y0 !== 24'(e0) || (chk1 && y1 !== 24'(e1))) begin
      failures++;
      $display("FAIL op=%s q=%0d a=%0d b=%0d w=%0d neg=%0d y=%0d,%0d exp=%0d,%0d",
               o.name(), q, a, b, w, wneg, y0, y1, e0, e1);
    end
  endtask

  task automatic all_ops();
    for (int o = 0; o <= 10; o++) repeat (40) check(alu_op_e'(o));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 12; s += 3) begin
      qmode = 4'(s); q = prime_info(4'(s)).q; m = prime_info(4'(s)).m; k = prime_info(4'(s)).k;
      all_ops();
    end
    qmode = QM_CONFIG; q = 24'd3329; k = 6'd24; m = 24'((64'd1 << 24) / 64'd3329);
    all_ops();
    qmode = QM_POW2; k = 6'd15; q = 24'd32768; m = '0;
    all_ops();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
