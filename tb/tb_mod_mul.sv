// tb_mod_mul: self-checking test of the modular multiplier.
//
// Sweeps all modulus modes: the twelve dedicated primes (qmode 0..11, q, m, k
// from the package table), the configurable Barrett path (qmode 12) with random
// q < 2^23, k = 2 * bitlength(q), m = floor(2^k / q), and the power-of-two
// path (qmode 13, q = 2^k). Random x, y < q; z is compared with x*y mod q in
// 64-bit arithmetic. Combinational: checked 1 ns after each vector.
module tb_mod_mul;
  import sapphire_pkg::*;
  logic [23:0] x, y, q, m, z;
  logic [5:0]  k;
  logic [3:0]  qmode;
  int checks = 0, failures = 0;

  mod_mul dut (.x(x), .y(y), .qmode(qmode), .q(q), .m(m), .k(k), .z(z));

  task automatic check(input logic [23:0] xx, input logic [23:0] yy);
    longint unsigned exp;
    x = xx; y = yy;
    #1;
    exp = (longint'(xx) * longint'(yy)) % longint'(q);
    checks++;
    if (z !== 24'(exp)) begin
      failures++;
      $display("FAIL mode=%0d q=%0d x=%0d y=%0d z=%0d exp=%0d", qmode, q, xx, yy, z, exp);
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
      check(q - 1, q - 1);
      repeat (300) check(24'($urandom % q), 24'($urandom % q));
    end
    qmode = QM_CONFIG;
    repeat (200) begin
      q = 24'($urandom_range(256, 24'h7FFFFF)) | 24'd1;
      k = 6'(2 * $clog2(int'(q) + 1));
      m = 24'((64'd1 << k) / longint'(q));
      check(q - 1, q - 1);
      repeat (5) check(24'($urandom % q), 24'($urandom % q));
    end
    qmode = QM_POW2; m = '0;
    for (int kk = 1; kk <= 23; kk++) begin
      k = 6'(kk); q = 24'(1 << kk);
      repeat (50) check(24'($urandom % q), 24'($urandom % q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
