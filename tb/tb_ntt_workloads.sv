// tb_ntt_workloads: the three published NTT configurations run end to end on
// the whole core at its default sizes.
//
// For (n, q) = (256, 7681), (512, 12289) and (1024, 12289) the testbench acts
// as the host: it computes psi (a primitive 2n-th root of unity mod q), loads
// omega^j, psi^i and n^-1 psi^-i into the constants RAM, writes two random
// polynomials a and b (after setting lg n, on which the cache layout depends)
// and a program that multiplies them in Z_q[x]/(x^n + 1):
// psi scaling of both, two forward DIF NTTs, a pointwise product, an inverse
// DIT NTT and the inverse psi scaling. The product read back is compared with
// a schoolbook negacyclic product. The operands sit in opposite cache banks
// (slot 0 and slot 4096/n), as two-operand passes require.
// Timing checked per configuration: each transform takes (n/2 + 1) lg n + 1
// cycles plus an (n/2 + 1)-cycle copy pass when lg n is even, and each
// forward psi pass n + 1 cycles. The time of one forward NTT with its psi
// pass is printed beside the published count.
module tb_ntt_workloads;
  import sapphire_pkg::*;

  logic        CLK = 0, RST = 1;
  logic [15:0] ADDR = '0;
  logic [31:0] WDATA = '0, RDATA;
  logic        WEN = 0, REN = 0, INT;
  int checks = 0, failures = 0;

  sapphire_top dut (.CLK(CLK), .RST(RST), .ADDR(ADDR), .WDATA(WDATA), .WEN(WEN), .REN(REN),
                    .RDATA(RDATA), .INT(INT));

  always #5 CLK = ~CLK;

  initial begin
    repeat (600000) @(posedge CLK);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, e);
    end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge CLK); ADDR = a; WDATA = d; WEN = 1;
    @(negedge CLK); WEN = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge CLK); ADDR = a; REN = 1;
    @(negedge CLK); REN = 0; d = RDATA;
  endtask

  function automatic longint unsigned powm(input longint unsigned b, input longint unsigned e,
                                           input longint unsigned m);
    longint unsigned r = 1;
    b = b % m;
    while (e != 0) begin
      if (e[0]) r = (r * b) % m;
      b = (b * b) % m;
      e >>= 1;
    end
    return r;
  endfunction

  function automatic logic [31:0] ins(input opcode_e op, input logic [26:0] f);
    return {op, f};
  endfunction
  function automatic logic [22:0] pd(input int dst, input int src);
    return {7'(dst), 7'(src), 9'b0};
  endfunction

  // one configuration: returns after checking product and cycle counts
  task automatic run_config(input int n, input int lg, input int q, input logic [3:0] qm,
                            input int paper_cycles);
    longint unsigned psi, omega, ninv, a [], b [], ab [];
    logic [31:0] prog [$];
    logic [31:0] d;
    int g, p, ntt_cycles, psi_cycles, cyc, bad, per_ntt;

    a = new[n]; b = new[n]; ab = new[n];
    // the cache layout depends on lg n: configure before loading data
    wr(MM_CFG, {24'b0, qm, 4'(lg)});
    for (g = 2; g < 500; g++) begin
      psi = powm(longint'(g), longint'((q - 1) / (2 * n)), longint'(q));
      if (powm(psi, longint'(n), longint'(q)) == longint'(q - 1)) break;
    end
    omega = (psi * psi) % longint'(q);
    ninv = powm(longint'(n), longint'(q - 2), longint'(q));
    for (int j = 0; j < n / 2; j++) wr(MM_CONST + 16'(j), 32'(powm(omega, longint'(j), longint'(q))));
    for (int i = 0; i < n; i++) wr(MM_CONST + 16'(n / 2 + i), 32'(powm(psi, longint'(i), longint'(q))));
    for (int i = 0; i < n; i++)
      wr(MM_CONST + 16'(3 * n / 2 + i),
         32'((ninv * powm(psi, longint'(2 * n - i), longint'(q))) % longint'(q)));

    for (int i = 0; i < n; i++) begin
      a[i] = $urandom % q; b[i] = $urandom % q; ab[i] = 0;
    end
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        if (i + j < n) ab[i + j] = (ab[i + j] + a[i] * b[j]) % longint'(q);
        else ab[i + j - n] = (ab[i + j - n] + longint'(q) - (a[i] * b[j]) % longint'(q)) % longint'(q);
      end
    p = 4096 / n;                 // first slot of the right bank
    for (int i = 0; i < n; i++) begin
      wr(16'(i), 32'(a[i]));
      wr(16'(p * n + i), 32'(b[i]));
    end

    // slots: a 0 (left), b p (right); NTT(a) -> p+1, NTT(b) -> 1,
    // product in p+1, inverse NTT -> 2
    prog.push_back(ins(OP_CONFIG, {4'(lg), qm, 19'b0}));
    prog.push_back(ins(OP_CLKCFG, 27'b010));
    prog.push_back(ins(OP_MULT_PSI, {4'b0, pd(0, 0)}));
    prog.push_back(ins(OP_MULT_PSI, {4'b0, pd(p, 0)}));
    prog.push_back(ins(OP_TRANSFORM, {TR_DIF_NTT, 2'b0, pd(p + 1, 0)}));
    prog.push_back(ins(OP_TRANSFORM, {TR_DIF_NTT, 2'b0, pd(1, p)}));
    prog.push_back(ins(OP_POLY_OP, {PO_MUL, pd(p + 1, 1)}));
    prog.push_back(ins(OP_TRANSFORM, {TR_DIT_INTT, 2'b0, pd(2, p + 1)}));
    prog.push_back(ins(OP_MULT_PSI, {4'b1000, pd(2, 0)}));
    prog.push_back(ins(OP_END, '0));
    foreach (prog[i]) wr(MM_IMEM + 16'(i), prog[i]);

    wr(MM_CTRL, 1);
    cyc = 0; ntt_cycles = 0; psi_cycles = 0;
    while (!INT) begin
      @(negedge CLK);
      cyc++;
      if (dut.u_ctrl.st == dut.u_ctrl.S_NTT) ntt_cycles++;
      if (dut.u_ctrl.st == dut.u_ctrl.S_PASS && dut.u_ctrl.pk == dut.u_ctrl.P_PSI) psi_cycles++;
    end
    per_ntt = (n / 2 + 1) * lg + 1 + ((lg % 2 == 0) ? n / 2 + 1 : 0);
    expect_eq($sformatf("n=%0d NTT cycles", n), ntt_cycles, 3 * per_ntt);
    expect_eq($sformatf("n=%0d forward psi pass cycles", n), psi_cycles, 2 * (n + 1));
    $display("n=%0d q=%0d: polynomial product %0d cycles; one NTT with psi pass %0d cycles (published %0d)",
             n, q, cyc, per_ntt + n + 1, paper_cycles);

    bad = 0;
    for (int i = 0; i < n; i++) begin
      rd(16'(2 * n + i), d);
      if (longint'(d[23:0]) != ab[i]) begin
        if (bad < 4) $display("FAIL n=%0d coefficient %0d: got %0d expected %0d", n, i, d[23:0], ab[i]);
        bad++;
      end
    end
    expect_eq($sformatf("n=%0d wrong product coefficients", n), bad, 0);
  endtask

  initial begin
    repeat (4) @(negedge CLK);
    RST = 0;
    run_config(256, 8, 7681, 4'd0, 1289);
    run_config(512, 9, 12289, 4'd1, 2826);
    run_config(1024, 10, 12289, 4'd1, 6155);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
