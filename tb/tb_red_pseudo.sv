// tb_red_pseudo: self-checking test of the pseudo-configurable reduction unit.
//
// For each of the twelve dedicated primes (q_SEL 0..11, including the folding
// reducer for 65537) applies random products z < q^2 plus 0, q and (q-1)^2 and
// compares r with z mod q; an unused selection code must give 0. This also
// exercises every red_const instance and red_65537. Combinational: checked
// 1 ns after each vector.
module tb_red_pseudo;
  import sapphire_pkg::*;
  logic [47:0] z;
  logic [3:0]  qsel;
  logic [23:0] r;
  int checks = 0, failures = 0;
  longint unsigned qs [12] = '{7681, 12289, 40961, 65537, 120833, 133121, 184321,
                               8380417, 8058881, 4205569, 4206593, 8404993};

  red_pseudo dut (.z(z), .qsel(qsel), .r(r));

  task automatic check(input int sel, input longint unsigned zz);
    qsel = 4'(sel); z = 48'(zz);
    #1;
    checks++;
    if (longint'(r) != zz % qs[sel]) begin
      failures++;
      $display("FAIL q=%0d z=%0d r=%0d exp=%0d", qs[sel], zz, r, zz % qs[sel]);
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
      // the table in the package must agree with the primes tested here
      checks++;
      if (longint'(prime_info(4'(s)).q) != qs[s]) begin
        failures++; $display("FAIL prime table entry %0d", s);
      end
      check(s, 0);
      check(s, qs[s]);
      check(s, (qs[s] - 1) * (qs[s] - 1));
      repeat (400) check(s, ({$urandom, $urandom} & 64'hFFFF_FFFF_FFFF) % (qs[s] * qs[s]));
    end
    qsel = 4'd14; z = 48'd12345; #1;
    checks++;
    if (r != 0) begin failures++; $display("FAIL unused q_SEL gives %0d", r); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
