// tb_ntt_ctrl: self-checking test of the constant-geometry NTT sequencer,
// run on a small datapath of the real blocks: the polynomial cache, the ALU
// (unified butterfly) and the twiddle-factor RAM.
//
// The twiddle RAM is loaded with w^j, j < n/2, for a primitive n-th root of
// unity w. For n = 16 ... 1024 (q = 7681 up to n = 512, q = 12289 at n = 1024)
// a random polynomial is transformed and compared with a naive O(n^2) DFT:
//   DIF NTT  (natural in)        -> bit-reversed DFT
//   DIT INTT (bit-reversed in)   -> n * inverse DFT in natural order
//   DIT NTT  (bit-reversed in)   -> DFT in natural order
//   DIF INTT (natural in)        -> bit-reversed n * inverse DFT
// Source and destination alternate between the two banks. The cycle count from
// start to done is checked against the paper's (n/2 + 1) cycles per stage,
// (n/2 + 1) lg n in all, plus one (n/2 + 1)-cycle copy pass when lg n is even.
module tb_ntt_ctrl;
  import sapphire_pkg::*;
  logic        clk = 0, rst = 1, start = 0;
  tr_mode_e    mode;
  logic [3:0]  logn, qmode;
  logic [23:0] q, m;
  logic [5:0]  k;
  logic        src_bank, dst_bank;
  logic [11:0] src_base, dst_base;
  logic        busy, done, dif, rd_en, rd_bank, tw_en, wr_en, wr_bank, wr_copy, tw_neg;
  logic [11:0] rd_a0, rd_a1, wr_a0, wr_a1;
  logic [12:0] tw_addr;
  cache_req_t  req [4];
  logic [23:0] crd [4];
  logic [23:0] y0, y1, tw_rdata;
  // testbench access to the memories while the sequencer is idle
  cache_req_t  h_req;
  logic        h_tw_en, h_tw_we;
  logic [12:0] h_tw_addr;
  logic [23:0] h_tw_wdata;
  int checks = 0, failures = 0;

  ntt_ctrl dut (.clk(clk), .rst(rst), .start(start), .mode(mode), .logn(logn),
    .src_bank(src_bank), .src_base(src_base), .dst_bank(dst_bank), .dst_base(dst_base),
    .busy(busy), .done(done), .dif(dif), .rd_en(rd_en), .rd_bank(rd_bank), .rd_a0(rd_a0),
    .rd_a1(rd_a1), .tw_en(tw_en), .tw_addr(tw_addr), .wr_en(wr_en), .wr_bank(wr_bank),
    .wr_a0(wr_a0), .wr_a1(wr_a1), .wr_copy(wr_copy), .tw_neg(tw_neg));

  poly_cache u_cache (.clk(clk), .logn(logn), .req(req), .rdata(crd));

  sram_sp #(.DEPTH(5120), .WIDTH(24)) u_tw (.clk(clk), .en(busy ? tw_en : h_tw_en),
    .we(!busy && h_tw_we), .addr(busy ? tw_addr : h_tw_addr), .wdata(h_tw_wdata),
    .rdata(tw_rdata));

  alu u_alu (.op(dif ? ALU_BF_DIF : ALU_BF_DIT), .a(crd[0]), .b(crd[1]), .w(tw_rdata),
    .w_neg(tw_neg), .qmode(qmode), .q(q), .m(m), .k(k), .y0(y0), .y1(y1));

  always_comb begin
    req[0] = '{en: rd_en, we: 1'b0, bank: rd_bank, addr: rd_a0, wdata: '0};
    req[1] = '{en: rd_en, we: 1'b0, bank: rd_bank, addr: rd_a1, wdata: '0};
    req[2] = '{en: wr_en, we: 1'b1, bank: wr_bank, addr: wr_a0, wdata: wr_copy ? crd[0] : y0};
    req[3] = '{en: wr_en, we: 1'b1, bank: wr_bank, addr: wr_a1, wdata: wr_copy ? crd[1] : y1};
    if (!busy) req[0] = h_req;
  end

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned pw [2048];
  longint unsigned x [1024], xf [1024], xi [1024], got [1024];

  function automatic longint unsigned powm(input longint unsigned b, input longint unsigned e);
    longint unsigned r = 1;
    b = b % q;
    while (e != 0) begin
      if (e[0]) r = (r * b) % q;
      b = (b * b) % q;
      e >>= 1;
    end
    return r;
  endfunction

  function automatic int brev(input int v, input int lg);
    int r = 0;
    for (int i = 0; i < lg; i++) if (v[i]) r |= 1 << (lg - 1 - i);
    return r;
  endfunction

  task automatic write_poly(input logic bank, input int base, input int n, input logic rev,
                            input longint unsigned v []);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      h_req = '{en: 1'b1, we: 1'b1, bank: bank, addr: 12'(base + i),
                wdata: 24'(v[rev ? brev(i, int'(logn)) : i])};
    end
    @(negedge clk); h_req = '0;
  endtask

  task automatic read_poly(input logic bank, input int base, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      h_req = '{en: 1'b1, we: 1'b0, bank: bank, addr: 12'(base + i), wdata: '0};
      @(negedge clk);
      h_req = '0;
      got[i] = longint'(crd[0]);
    end
  endtask

  task automatic transform(input tr_mode_e md, input logic sb, input int sbase,
                           input logic db, input int dbase, input int n, input int lg);
    int cyc = 0, exp_cyc;
    @(negedge clk);
    mode = md; src_bank = sb; src_base = 12'(sbase); dst_bank = db; dst_base = 12'(dbase);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = (n / 2 + 1) * (lg + ((lg % 2 == 0) ? 1 : 0)) + 1;
    checks++;
    if (cyc != exp_cyc) begin
      failures++; $display("FAIL n=%0d mode=%s took %0d cycles, expected %0d", n, md.name(), cyc, exp_cyc);
    end
  endtask

  task automatic compare(input string what, input int n, input int lg, input logic rev,
                         input longint unsigned e []);
    int bad = 0;
    for (int i = 0; i < n; i++)
      if (got[i] != e[rev ? brev(i, lg) : i]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s n=%0d: %0d wrong coefficients", what, n, bad); end
  endtask

  task automatic run(input int lg, input int sel);
    int n, g, pl, pr;
    longint unsigned w, ninv;
    longint unsigned xa [], fa [], ia [];
    n = 1 << lg;
    qmode = 4'(sel); q = prime_info(4'(sel)).q; m = prime_info(4'(sel)).m; k = prime_info(4'(sel)).k;
    logn = 4'(lg);
    // primitive n-th root of unity
    for (g = 2; g < 100; g++) begin
      w = powm(longint'(g), (longint'(q) - 1) / longint'(n));
      if (powm(w, longint'(n / 2)) == longint'(q) - 1) break;
    end
    for (int i = 0; i < n; i++) pw[i] = powm(w, longint'(i));
    // twiddle RAM: w^j, j < n/2
    for (int j = 0; j < n / 2; j++) begin
      @(negedge clk);
      h_tw_en = 1; h_tw_we = 1; h_tw_addr = 13'(j); h_tw_wdata = 24'(pw[j]);
    end
    @(negedge clk); h_tw_en = 0; h_tw_we = 0;
    // reference transforms
    xa = new[n]; fa = new[n]; ia = new[n];
    for (int i = 0; i < n; i++) xa[i] = longint'($urandom % q);
    for (int kk = 0; kk < n; kk++) begin
      longint unsigned sf = 0, si = 0;
      for (int i = 0; i < n; i++) begin
        sf = (sf + xa[i] * pw[(i * kk) % n]) % q;
        si = (si + xa[i] * pw[(n - (i * kk) % n) % n]) % q;
      end
      fa[kk] = sf;
      ia[kk] = si;
    end
    pl = $urandom_range(0, 4096 / n - 1);
    pr = $urandom_range(0, 4096 / n - 1);
    // DIF NTT: natural -> bit-reversed, left to right bank
    write_poly(1'b0, pl * n, n, 1'b0, xa);
    transform(TR_DIF_NTT, 1'b0, pl * n, 1'b1, pr * n, n, lg);
    read_poly(1'b1, pr * n, n);
    compare("DIF NTT", n, lg, 1'b1, fa);
    // DIT INTT back to the left bank: n * x in natural order
    transform(TR_DIT_INTT, 1'b1, pr * n, 1'b0, pl * n, n, lg);
    read_poly(1'b0, pl * n, n);
    for (int i = 0; i < n; i++) xa[i] = (xa[i] * longint'(n)) % q;
    compare("DIT INTT", n, lg, 1'b0, xa);
    for (int i = 0; i < n; i++) xa[i] = (xa[i] * powm(longint'(n), longint'(q) - 2)) % q;
    // DIT NTT: bit-reversed in -> natural, right to left bank
    write_poly(1'b1, pr * n, n, 1'b1, xa);
    transform(TR_DIT_NTT, 1'b1, pr * n, 1'b0, pl * n, n, lg);
    read_poly(1'b0, pl * n, n);
    compare("DIT NTT", n, lg, 1'b0, fa);
    // DIF INTT: natural in -> bit-reversed n * inverse DFT
    write_poly(1'b0, pl * n, n, 1'b0, xa);
    transform(TR_DIF_INTT, 1'b0, pl * n, 1'b1, pr * n, n, lg);
    read_poly(1'b1, pr * n, n);
    for (int i = 0; i < n; i++) ia[i] = (ia[i]) % q;
    compare("DIF INTT", n, lg, 1'b1, ia);
  endtask

  initial begin
    h_req = '0; h_tw_en = 0; h_tw_we = 0; h_tw_addr = '0; h_tw_wdata = '0;
    mode = TR_DIF_NTT; logn = 4'd4; qmode = '0; q = 24'd7681; m = 24'd273; k = 6'd21;
    src_bank = 0; dst_bank = 1; src_base = '0; dst_base = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(4, 0);
    run(5, 0);
    run(6, 0);
    run(8, 0);
    run(9, 1);
    run(10, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
