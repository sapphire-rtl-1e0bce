// tb_butterfly: self-checking test of the unified DIT/DIF butterfly.
//
// For the dedicated primes and the configurable Barrett mode it applies random
// a, b, w < q in both modes and compares with the reference butterflies
//   DIT (Cooley-Tukey):    o0 = a + w b,  o1 = a - w b
//   DIF (Gentleman-Sande): o0 = a + b,    o1 = (a - b) w
// all mod q, computed in 64-bit arithmetic. Combinational: checked after 1 ns.
module tb_butterfly;
  import sapphire_pkg::*;
  logic [23:0] a, b, w, q, m, o0, o1, prod;
  logic [5:0]  k;
  logic [3:0]  qmode;
  logic        dif;
  int checks = 0, failures = 0;

  butterfly dut (.a(a), .b(b), .w(w), .dif(dif), .qmode(qmode), .q(q), .m(m), .k(k),
                 .o0(o0), .o1(o1), .prod(prod));

  task automatic check(input logic d);
    longint unsigned e0, e1, qq;
    qq = longint'(q);
    a = 24'($urandom % q); b = 24'($urandom % q); w = 24'($urandom % q); dif = d;
    #1;
    if (!d) begin
      e0 = (longint'(a) + (longint'(w) * longint'(b)) % qq) % qq;
      e1 = (longint'(a) + qq - (longint'(w) * longint'(b)) % qq) % qq;
    end else begin
      e0 = (longint'(a) + longint'(b)) % qq;
      e1 = (((longint'(a) + qq - longint'(b)) % qq) * longint'(w)) % qq;
    end
    checks++;
    if (o0 !== 24'(e0) || o1 !== 24'(e1)) begin
      failures++;
      $display("FAIL dif=%0d q=%0d a=%0d b=%0d w=%0d o=%0d,%0d exp=%0d,%0d",
               d, q, a, b, w, o0, o1, e0, e1);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 12; s++) begin
      qmode = 4'(s); q = prime_info(4'(s)).q; m = prime_info(4'(s)).m; k = prime_info(4'(s)).k;
      repeat (200) begin check(1'b0); check(1'b1); end
    end
    qmode = QM_CONFIG;
    repeat (100) begin
      q = 24'($urandom_range(256, 24'h7FFFFF)) | 24'd1;
      k = 6'(2 * $clog2(int'(q) + 1));
      m = 24'((64'd1 << k) / longint'(q));
      repeat (4) begin check(1'b0); check(1'b1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
