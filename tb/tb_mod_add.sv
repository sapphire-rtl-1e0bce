// tb_mod_add: self-checking test of the modular adder.
//
// Drives random moduli q (2 .. 2^24-1) and operands x, y < q, plus the corner
// cases x + y = q and x + y just below 2^25, and compares z with (x + y) mod q
// computed in 64-bit integer arithmetic. The adder is combinational; each
// vector is checked 1 ns after it is applied.
module tb_mod_add;
  logic [23:0] x, y, q, z;
  int checks = 0, failures = 0;

  mod_add #(.W(24)) dut (.x(x), .y(y), .q(q), .z(z));

  task automatic check(input logic [23:0] qq, input logic [23:0] xx, input logic [23:0] yy);
    longint unsigned exp;
    q = qq; x = xx; y = yy;
    #1;
    exp = (longint'(xx) + longint'(yy)) % longint'(qq);
    checks++;
    if (z !== 24'(exp)) begin
      failures++;
      $display("FAIL q=%0d x=%0d y=%0d z=%0d exp=%0d", qq, xx, yy, z, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] qq;
    check(24'd7681, 24'd7680, 24'd1);
    check(24'd7681, 24'd7680, 24'd7680);
    check(24'hFFFFFF, 24'hFFFFFE, 24'hFFFFFE);
    check(24'd12289, 24'd0, 24'd0);
    for (int i = 0; i < 3000; i++) begin
      qq = 24'($urandom_range(2, 24'hFFFFFF));
      if (i % 3 == 0) qq = 24'($urandom_range(2, 20000));
      check(qq, 24'($urandom % qq), 24'($urandom % qq));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
