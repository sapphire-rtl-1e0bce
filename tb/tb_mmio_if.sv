// tb_mmio_if: self-checking test of the memory-mapped host interface.
//
// Connects the interface to behavioural memories (one-cycle read latency like
// the SRAMs) and checks the address decode: each region (cache, constants,
// instructions, CDT) receives the right enable, write flag and offset; seed
// words are stored and read back; control writes raise exactly one strobe;
// register reads return the right source one cycle after REN; memory accesses
// are dropped while the core is busy while register reads still work; start is
// ignored while busy, as are host seed writes; the core's digest write strobes
// load r0 and r1.
module tb_mmio_if;
  import sapphire_pkg::*;
  logic        clk = 0, rst = 1;
  logic [15:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic        wen = 0, ren = 0, busy = 0, irq = 0;
  cache_req_t  cache_req;
  logic [23:0] cache_rdata, const_rdata;
  logic        const_en, const_we, imem_en, imem_we, cdt_en, cdt_we;
  logic [12:0] const_addr;
  logic [23:0] const_wdata;
  logic [7:0]  imem_addr;
  logic [31:0] imem_wdata, imem_rdata, cdt_wdata, cdt_rdata, cycles;
  logic [5:0]  cdt_addr;
  logic [255:0] seed0, seed1, c_seed0 = '0, c_seed1 = '0;
  logic [1:0]   c_seed_we = '0;
  logic        start, cfg_we, q_we, m_we, k_we;
  logic [31:0] stats [6];
  int checks = 0, failures = 0;

  // behavioural memories
  logic [23:0] cmem [8192];
  logic [23:0] kmem [5120];
  logic [31:0] imem [256];
  logic [31:0] dmem [64];

  mmio_if dut (.clk(clk), .rst(rst), .addr(addr), .wdata(wdata), .wen(wen), .ren(ren),
    .rdata(rdata), .busy(busy), .irq(irq), .cache_req(cache_req), .cache_rdata(cache_rdata),
    .const_en(const_en), .const_we(const_we), .const_addr(const_addr),
    .const_wdata(const_wdata), .const_rdata(const_rdata), .imem_en(imem_en),
    .imem_we(imem_we), .imem_addr(imem_addr), .imem_wdata(imem_wdata),
    .imem_rdata(imem_rdata), .cdt_en(cdt_en), .cdt_we(cdt_we), .cdt_addr(cdt_addr),
    .cdt_wdata(cdt_wdata), .cdt_rdata(cdt_rdata), .seed0(seed0), .seed1(seed1),
    .c_seed_we(c_seed_we), .c_seed0(c_seed0), .c_seed1(c_seed1),
    .start(start), .cfg_we(cfg_we), .q_we(q_we), .m_we(m_we), .k_we(k_we),
    .logn(4'd9), .qmode(4'd1), .q(24'd12289), .m(24'd10921), .k(6'd27),
    .reg_val(24'h00ABCD), .tmp_val(24'h001234), .cycles(cycles), .stats(stats));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (cache_req.en) begin
      if (cache_req.we) cmem[{cache_req.bank, cache_req.addr}] <= cache_req.wdata;
      else cache_rdata <= cmem[{cache_req.bank, cache_req.addr}];
    end
    if (const_en) begin
      if (const_we) kmem[const_addr] <= const_wdata; else const_rdata <= kmem[const_addr];
    end
    if (imem_en) begin
      if (imem_we) imem[imem_addr] <= imem_wdata; else imem_rdata <= imem[imem_addr];
    end
    if (cdt_en) begin
      if (cdt_we) dmem[cdt_addr] <= cdt_wdata; else cdt_rdata <= dmem[cdt_addr];
    end
  end

  // strobe counters
  int n_start, n_cfg, n_q, n_m, n_k;
  always @(posedge clk) begin
    n_start += int'(start); n_cfg += int'(cfg_we); n_q += int'(q_we); n_m += int'(m_we); n_k += int'(k_we);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); addr = a; wdata = d; wen = 1;
    @(negedge clk); wen = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); addr = a; ren = 1;
    @(negedge clk); ren = 0; d = rdata;
  endtask

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] e);
    checks++;
    if (got !== e) begin failures++; $display("FAIL %s: %h expected %h", what, got, e); end
  endtask

  initial begin
    logic [31:0] d, v;
    logic [15:0] a;
    for (int i = 0; i < 8192; i++) cmem[i] = '0;
    for (int i = 0; i < 5120; i++) kmem[i] = '0;
    for (int i = 0; i < 256; i++) imem[i] = '0;
    for (int i = 0; i < 64; i++) dmem[i] = '0;
    cache_rdata = '0; const_rdata = '0; imem_rdata = '0; cdt_rdata = '0;
    cycles = 32'd777;
    for (int i = 0; i < 6; i++) stats[i] = 32'(100 + i);
    n_start = 0; n_cfg = 0; n_q = 0; n_m = 0; n_k = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    // memories: write then read back at random offsets
    repeat (200) begin
      a = 16'($urandom_range(0, 8191)); v = $urandom & 32'hFFFFFF;
      wr(a, v); rd(a, d); expect_eq("cache", d, v);
      checks++;
      if (cmem[a[12:0]] !== v[23:0]) begin failures++; $display("FAIL cache decode at %h", a); end
      a = MM_CONST + 16'($urandom_range(0, 5119)); v = $urandom & 32'hFFFFFF;
      wr(a, v); rd(a, d); expect_eq("constants", d, v);
      expect_eq("constants decode", 32'(kmem[a - MM_CONST]), v);
      a = MM_IMEM + 16'($urandom_range(0, 255)); v = $urandom;
      wr(a, v); rd(a, d); expect_eq("imem", d, v);
      expect_eq("imem decode", imem[a[7:0]], v);
      a = MM_CDT + 16'($urandom_range(0, 63)); v = $urandom;
      wr(a, v); rd(a, d); expect_eq("cdt", d, v);
      expect_eq("cdt decode", dmem[a[5:0]], v);
    end
    // seeds
    for (int i = 0; i < 16; i++) wr(MM_SEED + 16'(i), 32'h1000_0000 * 32'(i) + 32'(i));
    for (int i = 0; i < 16; i++) begin
      rd(MM_SEED + 16'(i), d);
      expect_eq("seed word", d, 32'h1000_0000 * 32'(i) + 32'(i));
    end
    expect_eq("seed0 word 3", seed0[96 +: 32], 32'h3000_0003);
    expect_eq("seed1 word 2", seed1[64 +: 32], 32'hA000_000A);
    // control strobes
    wr(MM_CFG, 32'h19); wr(MM_Q, 5); wr(MM_M, 6); wr(MM_K, 7); wr(MM_CTRL, 1);
    expect_eq("strobes", {n_start[7:0], n_cfg[7:0], n_q[7:0], n_m[7:0]}, 32'h01010101);
    expect_eq("k strobe", n_k, 1);
    // register reads
    rd(MM_CFG, d);    expect_eq("cfg", d, 32'h19);
    rd(MM_Q, d);      expect_eq("q", d, 12289);
    rd(MM_M, d);      expect_eq("m", d, 10921);
    rd(MM_K, d);      expect_eq("k", d, 27);
    rd(MM_REG, d);    expect_eq("reg", d, 32'hABCD);
    rd(MM_TMP, d);    expect_eq("tmp", d, 32'h1234);
    rd(MM_CYCLES, d); expect_eq("cycles", d, 777);
    for (int i = 0; i < 6; i++) begin
      rd(MM_STAT + 16'(i), d); expect_eq("stat", d, 32'(100 + i));
    end
    irq = 1;
    rd(MM_CTRL, d);   expect_eq("status", d, 32'h2);
    // busy: memory writes dropped, start ignored, status still readable
    busy = 1;
    v = cmem[5];
    wr(16'd5, 32'h55AA55);
    expect_eq("cache write dropped while busy", 32'(cmem[5]), 32'(v));
    rd(16'd5, d);
    expect_eq("cache read while busy gives 0", d, 0);
    wr(MM_CTRL, 1);
    expect_eq("start ignored while busy", n_start, 1);
    rd(MM_CTRL, d);   expect_eq("status busy", d, 32'h3);
    // host seed writes are dropped while busy; the core writes digests
    wr(MM_SEED, 32'hFFFF_FFFF);
    expect_eq("seed write dropped while busy", seed0[31:0], 32'h0000_0000);
    c_seed0 = {8{$urandom}}; c_seed1 = {8{$urandom}};
    c_seed_we = 2'b10;
    @(negedge clk); c_seed_we = 2'b00;
    expect_eq("core writes r1 only", seed0[31:0], 32'h0000_0000);
    expect_eq("core r1 word 7", seed1[224 +: 32], c_seed1[224 +: 32]);
    c_seed_we = 2'b11;
    @(negedge clk); c_seed_we = 2'b00;
    expect_eq("core r0 word 0", seed0[31:0], c_seed0[31:0]);
    expect_eq("core r0 word 5", seed0[160 +: 32], c_seed0[160 +: 32]);
    rd(MM_SEED + 16'd9, d);
    expect_eq("digest readable by host", d, c_seed1[63:32]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
