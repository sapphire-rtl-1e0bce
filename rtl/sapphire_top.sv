// sapphire_top: the Sapphire lattice-cryptography core.
//
// Wires the blocks of the core together: the instruction memory (1 KB, 256
// instructions) and the control unit that runs programs from it, the unified
// butterfly ALU with modular reduction for twelve dedicated primes, any q below
// 2^24 (Barrett) or a power of two, the 24 KB polynomial cache (two banks of
// four 1024 x 24 single-port SRAMs), the NTT sequencer and its 5120-word
// constants RAM (twiddle factors and the psi powers, 15 KB), the SHAKE-128/256
// pseudo-random generator on a Keccak-f[1600] core (also used for the SHA3-256 /
// SHA3-512 instructions, whose digests go to the seed registers), the distribution sampler
// with its 64 x 32 CDT table, three clock gates (Keccak, NTT, sampler) and the
// memory-mapped host interface.
// Host interface: ADDR (16-bit word address), WDATA/RDATA (32 bits), WEN and
// REN strobes, INT raised when a program reaches END (cleared by the next
// start). RDATA is valid one cycle after REN. The host loads the instruction
// memory, constants, CDT table, seeds and polynomials, writes the start
// register, waits for INT and reads results back. All logic runs on CLK with a
// synchronous active-high RST; the PRNG/Keccak, the sampler and the NTT
// sequencer run on gated copies of CLK whose enables the program sets.
// Following the paper: the block set, memory sizes, cache organisation, clock
// gates and interrupt. This design's own: the host address map, the instruction
// encoding and the handshakes between blocks (see the block files).
module sapphire_top
  import sapphire_pkg::*;
#(
  parameter int unsigned CACHE_SRAM_DEPTH = 1024,  // words per cache SRAM (x8)
  parameter int unsigned CONST_DEPTH      = 5120,  // NTT constants RAM words
  parameter int unsigned IMEM_DEPTH       = 256,   // 32-bit instructions
  parameter int unsigned CDT_DEPTH        = 64     // CDT table rows (32-bit)
) (
  input  logic        CLK,
  input  logic        RST,
  input  logic [15:0] ADDR,
  input  logic [31:0] WDATA,
  input  logic        WEN,
  input  logic        REN,
  output logic [31:0] RDATA,
  output logic        INT
);
  localparam int unsigned CAW = $clog2(CONST_DEPTH);
  localparam int unsigned IAW = $clog2(IMEM_DEPTH);
  localparam int unsigned DAW = $clog2(CDT_DEPTH);

  // ---------------------------------------------------------------------------
  // control unit and clock gates
  // ---------------------------------------------------------------------------
  logic        busy, irq, start;
  logic [3:0]  logn, qmode;
  logic [W-1:0] q, m;
  logic [5:0]  k;
  logic [2:0]  clk_en;
  logic        clk_keccak, clk_ntt, clk_samp;
  logic        h_cfg_we, h_q_we, h_m_we, h_k_we;

  clock_gate u_cg_keccak (.clk(CLK), .en(clk_en[2]), .gclk(clk_keccak));
  clock_gate u_cg_ntt    (.clk(CLK), .en(clk_en[1]), .gclk(clk_ntt));
  clock_gate u_cg_samp   (.clk(CLK), .en(clk_en[0]), .gclk(clk_samp));

  // instruction memory
  logic        c_imem_en;
  logic [7:0]  c_imem_addr;
  logic        h_imem_en, h_imem_we;
  logic [7:0]  h_imem_addr;
  logic [31:0] h_imem_wdata, imem_rdata;

  // cache
  cache_req_t  c_creq [4];
  cache_req_t  creq   [4];
  cache_req_t  h_creq;
  logic [W-1:0] crdata [4];

  // constants RAM
  logic        c_tw_en, h_const_en, h_const_we;
  logic [12:0] c_tw_addr, h_const_addr;
  logic [W-1:0] h_const_wdata, tw_rdata;

  // ALU
  alu_op_e     alu_op;
  logic [W-1:0] alu_a, alu_b, alu_w, alu_y0, alu_y1;
  logic        alu_wneg;

  // NTT sequencer
  logic        ntt_start, ntt_src_bank, ntt_dst_bank, ntt_done, ntt_dif;
  tr_mode_e    ntt_mode;
  logic [11:0] ntt_src_base, ntt_dst_base;
  logic        n_rd_en, n_rd_bank, n_tw_en, n_wr_en, n_wr_bank, n_wr_copy, n_tw_neg;
  logic [11:0] n_rd_a0, n_rd_a1, n_wr_a0, n_wr_a1;
  logic [12:0] n_tw_addr;

  // PRNG and sampler
  logic        prng_start, prng_stop, prng_shake256, prng_seed_sel;
  logic [15:0] prng_c0, prng_c1, prng_perms;
  logic [31:0] prng_word;
  logic        prng_valid, prng_ready;
  logic [255:0] seed0, seed1;
  logic        h_init, h_512, h_wvalid, h_wready, h_final, h_done;
  logic [31:0] h_word;
  logic [511:0] digest;
  logic [1:0]  seed_we;
  logic        smp_start, smp_stop, smp_tri2_neg, smp_valid, smp_accept, smp_ready;
  samp_type_e  smp_type;
  logic [14:0] smp_param;
  logic [W-1:0] smp_value;
  logic [10:0] smp_pos;
  logic        s_cdt_en, h_cdt_en, h_cdt_we;
  logic [5:0]  s_cdt_addr, h_cdt_addr;
  logic [31:0] h_cdt_wdata, cdt_rdata;

  logic [W-1:0] reg_val, tmp_val;
  logic [1:0]  flag;
  logic [31:0] cycles, n_rejected, n_branches, n_ntt_copy, n_tri_retry;

  sapphire_ctrl u_ctrl (
    .clk(CLK), .rst(RST), .start(start), .busy(busy), .irq(irq),
    .h_cfg_we(h_cfg_we), .h_cfg(WDATA[7:0]), .h_q_we(h_q_we), .h_m_we(h_m_we),
    .h_k_we(h_k_we), .h_wdata(WDATA[W-1:0]),
    .logn(logn), .qmode(qmode), .q(q), .m(m), .k(k), .clk_en(clk_en),
    .imem_en(c_imem_en), .imem_addr(c_imem_addr), .imem_rdata(imem_rdata),
    .creq(c_creq), .crdata(crdata),
    .tw_en(c_tw_en), .tw_addr(c_tw_addr), .tw_rdata(tw_rdata),
    .alu_op(alu_op), .alu_a(alu_a), .alu_b(alu_b), .alu_w(alu_w), .alu_wneg(alu_wneg),
    .alu_y0(alu_y0), .alu_y1(alu_y1),
    .ntt_start(ntt_start), .ntt_mode(ntt_mode), .ntt_src_bank(ntt_src_bank),
    .ntt_src_base(ntt_src_base), .ntt_dst_bank(ntt_dst_bank), .ntt_dst_base(ntt_dst_base),
    .ntt_done(ntt_done), .ntt_dif(ntt_dif),
    .n_rd_en(n_rd_en), .n_rd_bank(n_rd_bank), .n_rd_a0(n_rd_a0), .n_rd_a1(n_rd_a1),
    .n_tw_en(n_tw_en), .n_tw_addr(n_tw_addr), .n_wr_en(n_wr_en), .n_wr_bank(n_wr_bank),
    .n_wr_a0(n_wr_a0), .n_wr_a1(n_wr_a1), .n_wr_copy(n_wr_copy), .n_tw_neg(n_tw_neg),
    .prng_start(prng_start), .prng_stop(prng_stop), .prng_shake256(prng_shake256),
    .prng_seed_sel(prng_seed_sel), .prng_c0(prng_c0), .prng_c1(prng_c1),
    .h_init(h_init), .h_512(h_512), .h_word(h_word), .h_wvalid(h_wvalid), .h_wready(h_wready),
    .h_final(h_final), .h_done(h_done), .seed0(seed0), .seed1(seed1), .seed_we(seed_we),
    .smp_start(smp_start), .smp_stop(smp_stop), .smp_type(smp_type), .smp_param(smp_param),
    .smp_tri2_neg(smp_tri2_neg), .smp_valid(smp_valid), .smp_accept(smp_accept),
    .smp_value(smp_value), .smp_pos(smp_pos), .smp_ready(smp_ready),
    .reg_q(reg_val), .tmp_q(tmp_val), .flag_q(flag), .cycles(cycles),
    .n_rejected(n_rejected), .n_branches(n_branches), .n_ntt_copy(n_ntt_copy),
    .n_tri_retry(n_tri_retry));

  assign INT = irq;

  // statistics readable by the host
  logic [31:0] stats [6];
  assign stats[0] = n_rejected;
  assign stats[1] = n_branches;
  assign stats[2] = n_ntt_copy;
  assign stats[3] = n_tri_retry;
  assign stats[4] = {30'd0, flag};
  assign stats[5] = {16'd0, prng_perms};

  // ---------------------------------------------------------------------------
  // host interface
  // ---------------------------------------------------------------------------
  mmio_if u_mmio (
    .clk(CLK), .rst(RST), .addr(ADDR), .wdata(WDATA), .wen(WEN), .ren(REN), .rdata(RDATA),
    .busy(busy), .irq(irq),
    .cache_req(h_creq), .cache_rdata(crdata[0]),
    .const_en(h_const_en), .const_we(h_const_we), .const_addr(h_const_addr),
    .const_wdata(h_const_wdata), .const_rdata(tw_rdata),
    .imem_en(h_imem_en), .imem_we(h_imem_we), .imem_addr(h_imem_addr),
    .imem_wdata(h_imem_wdata), .imem_rdata(imem_rdata),
    .cdt_en(h_cdt_en), .cdt_we(h_cdt_we), .cdt_addr(h_cdt_addr), .cdt_wdata(h_cdt_wdata),
    .cdt_rdata(cdt_rdata),
    .seed0(seed0), .seed1(seed1), .c_seed_we(seed_we),
    .c_seed0(digest[255:0]), .c_seed1(h_512 ? digest[511:256] : digest[255:0]), .start(start),
    .cfg_we(h_cfg_we), .q_we(h_q_we), .m_we(h_m_we), .k_we(h_k_we),
    .logn(logn), .qmode(qmode), .q(q), .m(m), .k(k),
    .reg_val(reg_val), .tmp_val(tmp_val), .cycles(cycles), .stats(stats));

  // ---------------------------------------------------------------------------
  // memories: the core owns them while a program runs, the host otherwise
  // ---------------------------------------------------------------------------
  always_comb begin
    for (int p = 0; p < 4; p++) creq[p] = c_creq[p];
    if (!busy) creq[0] = h_creq;
  end

  poly_cache #(.SRAM_DEPTH(CACHE_SRAM_DEPTH)) u_cache (
    .clk(CLK), .logn(logn), .req(creq), .rdata(crdata));

  sram_sp #(.DEPTH(CONST_DEPTH), .WIDTH(W)) u_const_ram (
    .clk(CLK), .en(busy ? c_tw_en : h_const_en), .we(!busy && h_const_we),
    .addr(busy ? CAW'(c_tw_addr) : CAW'(h_const_addr)),
    .wdata(h_const_wdata), .rdata(tw_rdata));

  sram_sp #(.DEPTH(IMEM_DEPTH), .WIDTH(32)) u_imem (
    .clk(CLK), .en(busy ? c_imem_en : h_imem_en), .we(!busy && h_imem_we),
    .addr(busy ? IAW'(c_imem_addr) : IAW'(h_imem_addr)),
    .wdata(h_imem_wdata), .rdata(imem_rdata));

  sram_sp #(.DEPTH(CDT_DEPTH), .WIDTH(32)) u_cdt_ram (
    .clk(CLK), .en(busy ? s_cdt_en : h_cdt_en), .we(!busy && h_cdt_we),
    .addr(busy ? DAW'(s_cdt_addr) : DAW'(h_cdt_addr)),
    .wdata(h_cdt_wdata), .rdata(cdt_rdata));

  // ---------------------------------------------------------------------------
  // arithmetic, NTT sequencer, PRNG and sampler
  // ---------------------------------------------------------------------------
  alu u_alu (
    .op(alu_op), .a(alu_a), .b(alu_b), .w(alu_w), .w_neg(alu_wneg),
    .qmode(qmode), .q(q), .m(m), .k(k), .y0(alu_y0), .y1(alu_y1));

  ntt_ctrl u_ntt (
    .clk(clk_ntt), .rst(RST), .start(ntt_start), .mode(ntt_mode), .logn(logn),
    .src_bank(ntt_src_bank), .src_base(ntt_src_base),
    .dst_bank(ntt_dst_bank), .dst_base(ntt_dst_base),
    .busy(), .done(ntt_done), .dif(ntt_dif),
    .rd_en(n_rd_en), .rd_bank(n_rd_bank), .rd_a0(n_rd_a0), .rd_a1(n_rd_a1),
    .tw_en(n_tw_en), .tw_addr(n_tw_addr),
    .wr_en(n_wr_en), .wr_bank(n_wr_bank), .wr_a0(n_wr_a0), .wr_a1(n_wr_a1),
    .wr_copy(n_wr_copy), .tw_neg(n_tw_neg));

  prng u_prng (
    .clk(clk_keccak), .rst(RST), .start(prng_start), .shake256(prng_shake256),
    .seed(prng_seed_sel ? seed1 : seed0), .c0(prng_c0), .c1(prng_c1), .stop(prng_stop),
    .word(prng_word), .valid(prng_valid), .ready(prng_ready), .perms(prng_perms),
    .h_init(h_init), .h_512(h_512), .h_word(h_word), .h_wvalid(h_wvalid), .h_wready(h_wready),
    .h_final(h_final), .h_done(h_done), .digest(digest));

  sampler u_sampler (
    .clk(clk_samp), .rst(RST), .start(smp_start), .stop(smp_stop), .stype(smp_type),
    .param(smp_param), .reg_val(reg_val), .logn(logn), .qmode(qmode), .q(q), .m(m), .k(k),
    .tri2_neg(smp_tri2_neg), .word(prng_word), .word_valid(prng_valid),
    .word_ready(prng_ready), .cdt_en(s_cdt_en), .cdt_addr(s_cdt_addr),
    .cdt_rdata(cdt_rdata), .out_valid(smp_valid), .out_accept(smp_accept),
    .out_value(smp_value), .out_pos(smp_pos), .out_ready(smp_ready));
endmodule
