// tb_red_barrett_cfg: self-checking test of the configurable Barrett reducer.
//
// For random moduli q (2^8 .. 2^23) the test uses k = 2 * bitlength(q) and
// m = floor(2^k / q), applies random products z < q^2 (and the extremes 0 and
// (q-1)^2) and compares r with z mod q. Also checks the paper's Dilithium and
// Kyber/NewHope constants from its appendix. Combinational: checked after 1 ns.
module tb_red_barrett_cfg;
  logic [47:0] z;
  logic [23:0] q, m, r;
  logic [5:0]  k;
  int checks = 0, failures = 0;

  red_barrett_cfg #(.W(24)) dut (.z(z), .q(q), .m(m), .k(k), .r(r));

  task automatic check(input longint unsigned zz);
    z = 48'(zz);
    #1;
    checks++;
    if (longint'(r) != zz % longint'(q)) begin
      failures++;
      $display("FAIL q=%0d m=%0d k=%0d z=%0d r=%0d exp=%0d", q, m, k, zz, r, zz % longint'(q));
    end
  endtask

  function automatic longint unsigned rnd48();
    return {$urandom, $urandom} & 64'hFFFF_FFFF_FFFF;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b;
    // constants listed in the paper
    q = 24'd7681;    m = 24'd273;     k = 6'd21;
    repeat (200) check(rnd48() % (64'd7681 * 64'd7681));
    q = 24'd8380417; m = 24'd8396807; k = 6'd46;
    repeat (200) check(rnd48() % (64'd8380417 * 64'd8380417));
    check(64'd8380416 * 64'd8380416);
    for (int i = 0; i < 300; i++) begin
      q = 24'($urandom_range(256, 24'h7FFFFF)) | 24'd1;
      b = $clog2(int'(q) + 1);
      k = 6'(2 * b);
      m = 24'((64'd1 << k) / longint'(q));
      check(0);
      check(longint'(q - 1) * longint'(q - 1));
      repeat (10) check(rnd48() % (longint'(q) * longint'(q)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
