// tb_sapphire_top: end-to-end test of the Sapphire core at its default sizes.
//
// Acts as the host: over the memory-mapped port it loads the twiddle and psi
// constants for n = 256, q = 7681 (computed here from a primitive 512-th root of
// unity), two random polynomials, a CDT table, two seeds and a program, writes
// the start register and waits for the interrupt. The program exercises every
// instruction class: mult_psi, DIF NTT, pointwise multiplication, DIT inverse
// NTT (negacyclic product via the NTT, compared with a schoolbook product),
// rejection, binomial, CDT, uniform and the three trinary samplers, copy,
// equality and infinity-norm checks, shift, bit reversal, init, a counted loop
// built from creg / compare / branch, register transfers and tmp arithmetic, a
// switch to power-of-two and to run-time (configurable Barrett) moduli, and
// clock gating. Sample streams are compared with a SHAKE model written here
// (Keccak-f[1600] from its definition). The host then reads results back and
// compares them with reference values.
// Mechanisms counted (a failure for each that never happens): NTT transform,
// final NTT copy pass (lg n even), bank ping-pong, rejected candidates, PRNG
// stalls during Keccak re-permutation, trinary position retries, taken
// branches, modulus-mode switches, clock-gate disable, interrupt, host access
// dropped while busy. Cycle counts checked: n + 1 for a coefficient pass (the
// paper's psi multiplication), (n/2 + 1) per NTT stage, 24 cycles per Keccak
// permutation.
module tb_sapphire_top;
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
    repeat (400000) @(posedge CLK);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int N = 256, LG = 8, Q = 7681;

  task automatic fail(input string s);
    failures++;
    $display("FAIL %s", s);
  endtask

  task automatic expect_eq(input string what, input longint got, input longint e);
    checks++;
    if (got != e) fail($sformatf("%s: got %0d expected %0d", what, got, e));
  endtask

  // ---------------------------------------------------------------------------
  // host bus
  // ---------------------------------------------------------------------------
  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge CLK); ADDR = a; WDATA = d; WEN = 1;
    @(negedge CLK); WEN = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge CLK); ADDR = a; REN = 1;
    @(negedge CLK); REN = 0; d = RDATA;
  endtask

  function automatic logic [15:0] caddr(input int poly, input int i);
    return 16'(poly * N + i);
  endfunction

  // ---------------------------------------------------------------------------
  // instruction assembler (encoding of sapphire_pkg)
  // ---------------------------------------------------------------------------
  logic [31:0] prog [$];
  function automatic logic [31:0] ins(input opcode_e op, input logic [26:0] f);
    return {op, f};
  endfunction
  function automatic logic [26:0] pd(input int dst, input int src);
    return {4'b0, 7'(dst), 7'(src), 9'b0};
  endfunction
  function automatic void emit(input logic [31:0] i);
    prog.push_back(i);
  endfunction
  function automatic void i_config(input int lg, input logic [3:0] qm, input int k2);
    emit(ins(OP_CONFIG, {4'(lg), qm, 6'(k2), 13'b0}));
  endfunction
  function automatic void i_clk(input logic [2:0] en);
    emit(ins(OP_CLKCFG, {24'b0, en}));
  endfunction
  function automatic void i_creg(input logic c1, input logic [1:0] op, input int imm);
    emit(ins(OP_CREG, {c1, op, 8'b0, 16'(imm)}));
  endfunction
  function automatic void i_sample(input samp_type_e t, input logic s256, input int poly,
                                   input logic seed, input logic [14:0] prm);
    emit(ins(OP_SAMPLE, {t, s256, 7'(poly), seed, prm}));
  endfunction

  // ---------------------------------------------------------------------------
  // reference arithmetic
  // ---------------------------------------------------------------------------
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

  function automatic int brev(input int v, input int lg);
    int r = 0;
    for (int i = 0; i < lg; i++) if (v[i]) r |= 1 << (lg - 1 - i);
    return r;
  endfunction

  // Keccak-f[1600] from its definition: round constants from the LFSR and
  // rotation offsets from the (x, y) walk are computed, not tabulated
  function automatic logic rc_bit(input int t);
    logic [7:0] r = 8'h01;
    if (t % 255 == 0) return 1'b1;
    for (int i = 1; i <= t % 255; i++) begin
      r = {r[6:0], 1'b0} ^ (r[7] ? 8'h71 : 8'h00);
    end
    return r[0];
  endfunction

  function automatic logic [63:0] rotl(input logic [63:0] v, input int n);
    n = n % 64;
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic void keccak_f(ref logic [63:0] a [25]);
    logic [63:0] c [5], d [5], b [25];
    int rot [25];
    int x, y, t;
    rot[0] = 0; x = 1; y = 0;
    for (t = 0; t < 24; t++) begin
      int nx;
      rot[x + 5 * y] = ((t + 1) * (t + 2) / 2) % 64;
      nx = y; y = (2 * x + 3 * y) % 5; x = nx;
    end
    for (int r = 0; r < 24; r++) begin
      for (x = 0; x < 5; x++) c[x] = a[x] ^ a[x + 5] ^ a[x + 10] ^ a[x + 15] ^ a[x + 20];
      for (x = 0; x < 5; x++) d[x] = c[(x + 4) % 5] ^ rotl(c[(x + 1) % 5], 1);
      for (int i = 0; i < 25; i++) a[i] ^= d[i % 5];
      for (x = 0; x < 5; x++)
        for (y = 0; y < 5; y++) b[y + 5 * ((2 * x + 3 * y) % 5)] = rotl(a[x + 5 * y], rot[x + 5 * y]);
      for (x = 0; x < 5; x++)
        for (y = 0; y < 5; y++)
          a[x + 5 * y] = b[x + 5 * y] ^ (~b[(x + 1) % 5 + 5 * y] & b[(x + 2) % 5 + 5 * y]);
      for (int j = 0; j < 7; j++)
        if (rc_bit(j + 7 * r)) a[0][(1 << j) - 1] ^= 1'b1;
    end
  endfunction

  // SHAKE-128/256 output words of the message seed || c0 || c1 (36 bytes)
  function automatic void shake_words(input logic [255:0] seed, input logic [15:0] c0,
                                      input logic [15:0] c1, input logic s256, input int nw,
                                      ref logic [31:0] out [$]);
    logic [63:0] a [25];
    logic [1599:0] m;
    int rate;
    rate = s256 ? 34 : 42;
    m = '0;
    m[255:0] = seed; m[271:256] = c0; m[287:272] = c1; m[295:288] = 8'h1F;
    m[32 * rate - 1] = 1'b1;
    for (int i = 0; i < 25; i++) a[i] = m[64 * i +: 64];
    keccak_f(a);
    out.delete();
    while (out.size() < nw) begin
      for (int i = 0; i < rate && out.size() < nw; i++) out.push_back(a[i / 2][32 * (i % 2) +: 32]);
      if (out.size() < nw) keccak_f(a);
    end
  endfunction

  // SHA3-256 / SHA3-512 of a message of 32-bit words (little-endian bytes)
  function automatic logic [511:0] sha3(input logic s512, ref logic [31:0] msg [$]);
    logic [63:0] a [25];
    logic [1599:0] blk;
    logic [511:0] r;
    int rate, i, k;
    logic last;
    rate = s512 ? 18 : 34;
    for (int j = 0; j < 25; j++) a[j] = '0;
    i = 0;
    last = 0;
    while (!last) begin
      blk = '0;
      k = 0;
      while (k < rate && i < msg.size()) begin blk[32 * k +: 32] = msg[i]; k++; i++; end
      if (k < rate) begin
        blk[32 * k +: 8] = 8'h06;
        blk[32 * rate - 1] = 1'b1;
        last = 1;
      end
      for (int j = 0; j < 25; j++) a[j] = a[j] ^ blk[64 * j +: 64];
      keccak_f(a);
    end
    for (int j = 0; j < 8; j++) r[64 * j +: 64] = a[j];
    return r;
  endfunction

  // ---------------------------------------------------------------------------
  // mechanism counters (observed inside the design)
  // ---------------------------------------------------------------------------
  int cnt_ntt_stage_cycles, cnt_prng_stall, cnt_gated, cnt_bank_switch, cnt_dropped;
  int cnt_hash_stall, max_perms;
  int cnt_pass_cycles;
  int pass_start;
  logic last_rd_bank;

  always @(posedge CLK) begin
    if (dut.busy && !RST) begin
      if (dut.u_ctrl.st == dut.u_ctrl.S_SAMP && !dut.prng_valid) cnt_prng_stall++;
      if (dut.clk_en != 3'b111) cnt_gated++;
      if (dut.n_rd_en) begin
        if (dut.n_rd_bank != last_rd_bank) cnt_bank_switch++;
        last_rd_bank <= dut.n_rd_bank;
      end
      if ((WEN || REN) && ADDR < 16'h2000) cnt_dropped++;
      if (dut.h_wvalid && !dut.h_wready) cnt_hash_stall++;
      if (int'(dut.prng_perms) > max_perms) max_perms = int'(dut.prng_perms);
    end
  end

  // ---------------------------------------------------------------------------
  // test
  // ---------------------------------------------------------------------------
  longint unsigned a [N], b [N], c [N], ab [N];
  logic [31:0] d;
  logic [255:0] seed0, seed1;
  logic [31:0] stream [$];
  logic [511:0] dig;
  logic [23:0] res [N];
  int L_loop, L_fail, k_pow2;
  longint unsigned psi, omega, ninv;
  int cdt_s, cdt_r;
  logic [31:0] cdt_t [64];
  longint unsigned qc;

  task automatic read_poly(input int poly);
    for (int i = 0; i < N; i++) begin
      rd(caddr(poly, i), d);
      res[i] = d[23:0];
    end
  endtask

  task automatic write_poly(input int poly, input longint unsigned v [N]);
    for (int i = 0; i < N; i++) wr(caddr(poly, i), 32'(v[i]));
  endtask

  initial begin
    int g, cyc, ntt_cycles, psi_cycles, n_accept, n_plus, n_minus, n_zero, bad;
    longint unsigned sum10;

    repeat (4) @(negedge CLK);
    RST = 0;

    // constants: psi = primitive 2n-th root, omega = psi^2
    for (g = 2; g < 200; g++) begin
      psi = powm(longint'(g), (Q - 1) / (2 * N), Q);
      if (powm(psi, N, Q) == Q - 1) break;
    end
    omega = (psi * psi) % Q;
    ninv = powm(N, Q - 2, Q);
    for (int j = 0; j < N / 2; j++) wr(MM_CONST + 16'(j), 32'(powm(omega, j, Q)));
    for (int i = 0; i < N; i++) wr(MM_CONST + 16'(N / 2 + i), 32'(powm(psi, i, Q)));
    for (int i = 0; i < N; i++)
      wr(MM_CONST + 16'(3 * N / 2 + i), 32'((ninv * powm(psi, 2 * N - i, Q)) % Q));

    // operands and negacyclic schoolbook product
    for (int i = 0; i < N; i++) begin a[i] = $urandom % Q; b[i] = $urandom % Q; c[i] = $urandom % 3329; end
    for (int i = 0; i < N; i++) ab[i] = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (i + j < N) ab[i + j] = (ab[i + j] + a[i] * b[j]) % Q;
        else           ab[i + j - N] = (ab[i + j - N] + Q - (a[i] * b[j]) % Q) % Q;
      end
    write_poly(0, a);
    write_poly(16, b);
    write_poly(23, c);
    // garbage in the polynomial that INIT clears
    for (int i = 0; i < N; i++) wr(caddr(21, i), $urandom % Q);

    // seeds
    for (int i = 0; i < 8; i++) begin
      seed0[32 * i +: 32] = 32'(32'h9E3779B9 * (i + 1));
      seed1[32 * i +: 32] = 32'(32'h7F4A7C15 * (i + 1));
      wr(MM_SEED + 16'(i), seed0[32 * i +: 32]);
      wr(MM_SEED + 16'(8 + i), seed1[32 * i +: 32]);
    end
    // CDT table: r = 16, s = 12 (a narrow discrete Gaussian, thresholds of
    // P(|x| <= z) scaled to 2^16)
    cdt_s = 12; cdt_r = 16;
    for (int z = 0; z < 64; z++) begin
      real sig, acc, tot;
      sig = 1.7; acc = 0.0; tot = 0.0;
      for (int t = -40; t <= 40; t++) tot += $exp(-(t * t) / (2.0 * sig * sig));
      for (int t = -z; t <= z; t++) acc += $exp(-(t * t) / (2.0 * sig * sig));
      cdt_t[z] = (z < cdt_s) ? 32'(int'(acc / tot * 65535.0)) : 32'hFFFF;
      wr(MM_CDT + 16'(z), cdt_t[z]);
    end
    // run-time modulus for the configurable mode: q = 3329
    wr(MM_Q, 3329);
    wr(MM_M, 32'((64'd1 << 24) / 64'd3329));
    wr(MM_K, 24);

    // ----------------------------------------------------------------- program
    k_pow2 = 16;
    i_config(LG, 4'd0, 0);
    i_clk(3'b111);
    // negacyclic product: poly2 = a * b
    emit(ins(OP_MULT_PSI, {1'b0, 3'b0, pd(0, 0)[22:0]}));
    emit(ins(OP_MULT_PSI, {1'b0, 3'b0, pd(16, 0)[22:0]}));
    i_clk(3'b010);                                           // only the NTT clock
    emit(ins(OP_TRANSFORM, {TR_DIF_NTT, 2'b0, pd(17, 0)[22:0]}));
    emit(ins(OP_TRANSFORM, {TR_DIF_NTT, 2'b0, pd(1, 16)[22:0]}));
    emit(ins(OP_POLY_OP, {PO_MUL, pd(17, 1)[22:0]}));
    emit(ins(OP_TRANSFORM, {TR_DIT_INTT, 2'b0, pd(2, 17)[22:0]}));
    emit(ins(OP_MULT_PSI, {1'b1, 3'b0, pd(2, 0)[22:0]}));
    i_clk(3'b101);                                           // Keccak and sampler
    // sampling
    i_creg(1'b0, 2'd0, 0); i_creg(1'b1, 2'd0, 0);
    i_sample(SM_REJ, 1'b0, 3, 1'b0, '0);
    i_creg(1'b0, 2'd1, 1);
    i_sample(SM_BIN, 1'b1, 4, 1'b1, 15'd4);
    i_sample(SM_CDT, 1'b0, 5, 1'b0, {1'b0, 6'(cdt_r), 1'b0, 7'(cdt_s)});
    emit(ins(OP_REG_IMM, 27'd2));
    i_sample(SM_UNI, 1'b1, 6, 1'b0, 15'd3);
    i_sample(SM_TRI1, 1'b0, 7, 1'b1, 15'd200);
    emit(ins(OP_REG_IMM, 27'd30));
    i_sample(SM_TRI2, 1'b0, 8, 1'b0, 15'd40);
    i_sample(SM_TRI3, 1'b1, 9, 1'b1, 15'd2);
    // copy / equality / norm / shift / bit reversal / init
    emit(ins(OP_POLY_COPY, pd(18, 3)));
    emit(ins(OP_EQ_CHECK, pd(18, 3)));
    L_fail = 80;
    emit(ins(OP_BRANCH, {1'b1, FLAG_GT, 16'b0, 8'(L_fail)}));   // -> fail if not equal
    emit(ins(OP_REG_IMM, 27'd4));
    emit(ins(OP_INF_NORM, pd(4, 0)));
    emit(ins(OP_BRANCH, {1'b1, FLAG_GT, 16'b0, 8'(L_fail)}));   // binomial k=4 within 4
    emit(ins(OP_SHIFT, {1'b0, 3'b0, pd(19, 3)[22:0]}));
    emit(ins(OP_POLY_OP, {PO_BITREV, pd(20, 3)[22:0]}));
    emit(ins(OP_INIT, pd(21, 0)));
    // counted loop: poly10 = b + 3 * 5 using creg / compare / branch
    emit(ins(OP_POLY_COPY, pd(10, 2)));
    emit(ins(OP_REG_IMM, 27'd5));
    i_creg(1'b0, 2'd0, 0);
    L_loop = prog.size();
    emit(ins(OP_POLY_OP, {PO_CADD, pd(10, 10)[22:0]}));
    i_creg(1'b0, 2'd1, 1);
    emit(ins(OP_COMPARE, {2'd2, 1'b0, 24'd3}));
    emit(ins(OP_BRANCH, {1'b0, FLAG_LT, 16'b0, 8'(L_loop)}));
    // sum of poly10 into reg, then tmp = 100 + reg, reg = poly10[c1 = 7]
    emit(ins(OP_REG_POLY, {2'd1, 2'd0, pd(10, 0)[22:0]}));
    emit(ins(OP_TMP_IMM, 27'd100));
    emit(ins(OP_TMP_OP, {3'd0, 24'd0}));
    i_creg(1'b1, 2'd0, 7);
    emit(ins(OP_REG_POLY, {2'd2, 2'd2, pd(10, 0)[22:0]}));
    emit(ins(OP_POLY_REG, {2'd0, 2'd0, pd(11, 0)[22:12], 12'd9}));
    // power-of-two modulus 2^16: poly22 = poly4 * poly3 mod 2^16
    emit(ins(OP_POLY_COPY, pd(22, 4)));
    i_config(LG, QM_POW2, k_pow2);
    emit(ins(OP_POLY_OP, {PO_MUL, pd(22, 3)[22:0]}));
    // run-time modulus 3329: poly23 += 1000
    i_config(LG, QM_CONFIG, 0);
    emit(ins(OP_REG_IMM, 27'd3000));
    emit(ins(OP_POLY_OP, {PO_CADD, pd(23, 23)[22:0]}));
    i_config(LG, 4'd0, 0);
    // SHA-3: r1 = SHA3-256(poly2 || r0), then r0 || r1 = SHA3-512(r1)
    emit(ins(OP_SHA3, {3'(SH_INIT), 1'b0, 23'd0}));
    emit(ins(OP_SHA3, {3'(SH_ABS_POLY), 1'b0, pd(2, 0)[22:0]}));
    emit(ins(OP_SHA3, {3'(SH_ABS_SEED), 1'b0, 7'd0, 1'b0, 15'd0}));
    emit(ins(OP_SHA3, {3'(SH_DIGEST), 1'b0, 7'd0, 1'b1, 15'd0}));
    emit(ins(OP_SHA3, {3'(SH_INIT), 1'b1, 23'd0}));
    emit(ins(OP_SHA3, {3'(SH_ABS_SEED), 1'b1, 7'd0, 1'b1, 15'd0}));
    emit(ins(OP_SHA3, {3'(SH_DIGEST), 1'b1, 23'd0}));
    emit(ins(OP_END, '0));
    while (prog.size() < L_fail) emit(ins(OP_NOP, '0));
    emit(ins(OP_REG_IMM, 27'hBAD));                           // failure exit
    emit(ins(OP_END, '0));
    foreach (prog[i]) wr(MM_IMEM + 16'(i), prog[i]);
    // read one instruction back
    rd(MM_IMEM + 16'd3, d);
    expect_eq("imem read-back", d, prog[3]);

    // ------------------------------------------------------------------- run
    wr(MM_CTRL, 1);
    cyc = 0; ntt_cycles = 0; psi_cycles = 0;
    // the host tries to write the cache while the core is busy: dropped
    @(negedge CLK); ADDR = caddr(0, 0); WDATA = 32'h123; WEN = 1;
    @(negedge CLK); WEN = 0;
    while (!INT) begin
      @(negedge CLK);
      cyc++;
      if (dut.u_ctrl.st == dut.u_ctrl.S_NTT) ntt_cycles++;
      if (dut.u_ctrl.st == dut.u_ctrl.S_PASS && dut.u_ctrl.pk == dut.u_ctrl.P_PSI) psi_cycles++;
    end
    $display("program ran %0d cycles", cyc);
    rd(MM_CTRL, d);
    expect_eq("status irq", d[1:0], 2'b10);
    rd(MM_REG, d);
    checks++;
    if (d == 32'hBAD) fail("program took its failure branch");
    // 3 forward/inverse transforms, each (n/2+1)(lg n) + copy pass + done cycle
    expect_eq("NTT cycles", ntt_cycles, 3 * ((N / 2 + 1) * (LG + 1) + 1));
    expect_eq("psi pass cycles", psi_cycles, 2 * (N + 1));

    // --------------------------------------------------------------- results
    read_poly(2);
    bad = 0;
    for (int i = 0; i < N; i++) if (res[i] != 24'(ab[i])) bad++;
    expect_eq("negacyclic product mismatches", bad, 0);

    // rejection sampling from SHAKE-128(seed0, 0, 0)
    shake_words(seed0, 16'd0, 16'd0, 1'b0, 400, stream);
    read_poly(3);
    begin
      int idx, used;
      idx = 0; used = 0; bad = 0;
      while (idx < N) begin
        int x;
        x = int'(stream[used] & 32'h1FFF);
        used++;
        if (x < Q) begin
          if (res[idx] != 24'(x)) bad++;
          idx++;
        end
      end
      expect_eq("rejection samples mismatches", bad, 0);
      // the counter also holds the uniform sampler's rejections
      checks++;
      if (dut.u_ctrl.n_rejected < used - N) fail("fewer rejections counted than in the stream");
      for (int i = 0; i < N; i++) a[i] = res[i];
    end
    // binomial k = 4 from SHAKE-256(seed1, c0 = 1, 0)
    shake_words(seed1, 16'd1, 16'd0, 1'b1, N, stream);
    read_poly(4);
    bad = 0;
    for (int i = 0; i < N; i++) begin
      int v;
      v = $countones(stream[i] & 32'hF) - $countones((stream[i] >> 4) & 32'hF);
      if (res[i] != ((v < 0) ? 24'(Q + v) : 24'(v))) bad++;
      b[i] = res[i];
    end
    expect_eq("binomial samples mismatches", bad, 0);
    // CDT: SHAKE-128(seed0, 1, 0), one word per sample
    shake_words(seed0, 16'd1, 16'd0, 1'b0, N, stream);
    read_poly(5);
    bad = 0;
    for (int i = 0; i < N; i++) begin
      int e;
      e = 0;
      for (int z = 0; z < cdt_s; z++) if ((stream[i] & 32'hFFFF) > cdt_t[z]) e++;
      if (res[i] != (stream[i][31] ? 24'((Q - e) % Q) : 24'(e))) begin
        if (bad < 4) $display("CDT %0d: got %0d word %h e %0d", i, res[i], stream[i], e);
        bad++;
      end
    end
    expect_eq("CDT samples mismatches", bad, 0);
    // uniform in [-2, 2]
    read_poly(6);
    bad = 0;
    for (int i = 0; i < N; i++) if (!(res[i] <= 2 || res[i] >= Q - 2)) bad++;
    expect_eq("uniform samples out of range", bad, 0);
    // trinary with 200 non-zeros, with 30 ones and 40 minus ones, and 2-bit
    read_poly(7);
    n_plus = 0; n_minus = 0; n_zero = 0;
    for (int i = 0; i < N; i++) begin
      if (res[i] == 1) n_plus++; else if (res[i] == Q - 1) n_minus++; else if (res[i] == 0) n_zero++;
    end
    expect_eq("trinary-1 non-zeros", n_plus + n_minus, 200);
    expect_eq("trinary-1 other values", n_zero + n_plus + n_minus, N);
    read_poly(8);
    n_plus = 0; n_minus = 0;
    for (int i = 0; i < N; i++) begin
      if (res[i] == 1) n_plus++; else if (res[i] == Q - 1) n_minus++;
    end
    expect_eq("trinary-2 ones", n_plus, 40);
    expect_eq("trinary-2 minus ones", n_minus, 30);
    read_poly(9);
    bad = 0;
    for (int i = 0; i < N; i++) if (!(res[i] == 0 || res[i] == 1 || res[i] == Q - 1)) bad++;
    expect_eq("trinary-3 out of range", bad, 0);
    // copy, shift (x * a mod x^n + 1), bit reversal, init
    read_poly(18);
    bad = 0;
    for (int i = 0; i < N; i++) if (res[i] != 24'(a[i])) bad++;
    expect_eq("copy mismatches", bad, 0);
    read_poly(19);
    bad = 0;
    for (int i = 0; i < N; i++)
      if (res[i] != ((i == 0) ? 24'((Q - a[N - 1]) % Q) : 24'(a[i - 1]))) bad++;
    expect_eq("shift mismatches", bad, 0);
    read_poly(20);
    bad = 0;
    for (int i = 0; i < N; i++) if (res[brev(i, LG)] != 24'(a[i])) bad++;
    expect_eq("bit-reversal mismatches", bad, 0);
    read_poly(21);
    bad = 0;
    for (int i = 0; i < N; i++) if (res[i] != 0) bad++;
    expect_eq("init mismatches", bad, 0);
    // loop result, sum, tmp arithmetic, element transfer
    read_poly(10);
    bad = 0; sum10 = 0;
    for (int i = 0; i < N; i++) begin
      if (res[i] != 24'((ab[i] + 15) % Q)) bad++;
      sum10 = (sum10 + res[i]) % Q;
    end
    expect_eq("loop (3 x cadd 5) mismatches", bad, 0);
    rd(MM_TMP, d);
    expect_eq("tmp = 100 + sum", d, (100 + sum10) % Q);
    rd(MM_REG, d);
    expect_eq("reg after run", d, 3000);
    rd(caddr(11, 9), d);
    expect_eq("poly_reg element", d, (ab[7] + 15) % Q);
    // power-of-two product
    read_poly(22);
    bad = 0;
    for (int i = 0; i < N; i++) if (res[i] != 24'((a[i] * b[i]) % 65536)) bad++;
    expect_eq("mod 2^16 product mismatches", bad, 0);
    // configurable modulus
    read_poly(23);
    bad = 0;
    for (int i = 0; i < N; i++) if (res[i] != 24'((c[i] + 3000) % 3329)) bad++;
    expect_eq("mod 3329 addition mismatches", bad, 0);
    // SHA-3 digests in the seed registers
    stream.delete();
    for (int i = 0; i < N; i++) stream.push_back(32'(ab[i]));
    for (int i = 0; i < 8; i++) stream.push_back(seed0[32 * i +: 32]);
    dig = sha3(1'b0, stream);
    stream.delete();
    for (int i = 0; i < 8; i++) stream.push_back(dig[32 * i +: 32]);
    dig = sha3(1'b1, stream);
    bad = 0;
    for (int i = 0; i < 16; i++) begin
      rd(MM_SEED + 16'(i), d);
      if (d != dig[32 * i +: 32]) bad++;
    end
    expect_eq("SHA3-256 then SHA3-512 digest words wrong", bad, 0);
    // the write issued while busy was dropped
    rd(caddr(0, 0), d);
    checks++;
    if (d == 32'h123) fail("host write during a run reached the cache");

    // ------------------------------------------------------------ mechanisms
    rd(MM_STAT + 16'd2, d);
    $display("mechanisms: ntt_copy=%0d bank_switch=%0d rejected=%0d prng_stall=%0d tri_retry=%0d branches=%0d gated=%0d dropped=%0d hash_stall=%0d max_perms=%0d",
             d, cnt_bank_switch, dut.u_ctrl.n_rejected, cnt_prng_stall, dut.u_ctrl.n_tri_retry,
             dut.u_ctrl.n_branches, cnt_gated, cnt_dropped, cnt_hash_stall, max_perms);
    checks++; if (d == 0) fail("mechanism never happened: NTT copy pass");
    checks++; if (cnt_bank_switch == 0) fail("mechanism never happened: bank ping-pong");
    checks++; if (dut.u_ctrl.n_rejected == 0) fail("mechanism never happened: rejection");
    checks++; if (cnt_prng_stall == 0) fail("mechanism never happened: PRNG stall");
    checks++; if (dut.u_ctrl.n_tri_retry == 0) fail("mechanism never happened: trinary retry");
    checks++; if (dut.u_ctrl.n_branches != 2) fail("taken branches != 2");
    checks++; if (cnt_gated == 0) fail("mechanism never happened: clock gating");
    checks++; if (cnt_dropped == 0) fail("mechanism never happened: dropped host access");
    checks++; if (max_perms < 2) fail("mechanism never happened: Keccak re-permutation");
    checks++; if (cnt_hash_stall == 0) fail("mechanism never happened: hash absorb stall");
    rd(MM_STAT + 16'd5, d);
    expect_eq("permutations of the last hash", d, 1);

    // a second start runs the program again with the same result for poly 3
    // (the hash instructions overwrote the seeds: the host restores them)
    for (int i = 0; i < 8; i++) begin
      wr(MM_SEED + 16'(i), seed0[32 * i +: 32]);
      wr(MM_SEED + 16'(8 + i), seed1[32 * i +: 32]);
    end
    wr(MM_CTRL, 1);
    while (!INT) @(negedge CLK);
    read_poly(18);
    bad = 0;
    for (int i = 0; i < N; i++) if (res[i] != 24'(a[i])) bad++;
    expect_eq("second run rejection samples", bad, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
