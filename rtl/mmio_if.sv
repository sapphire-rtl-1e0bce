// mmio_if: memory-mapped host interface of the Sapphire core.
//
// The host (a RISC-V processor in the paper's chip) reaches the core through a
// 16-bit word address, 32-bit write data and 32-bit read data, with separate
// write and read strobes. The interface decodes the address into the polynomial
// cache, the NTT constants RAM, the instruction memory, the CDT table, the two
// 256-bit seed registers (r0 and r1, eight 32-bit words each) and a few control
// registers (start/status, lg n and modulus mode, q, m, k, reg, tmp, the
// cycle count of the last program and event counters). The seed registers are held here;
// the core writes SHA-3 digests into them, the host only while no program runs.
// While a program runs the memories belong to the core: host memory accesses
// are dropped, register reads still work. Reads take one cycle: RDATA is valid
// in the cycle after REN and holds until the next read.
// The paper says only that the host reaches the core's memories and registers
// through memory-mapped addresses; the address map (sapphire_pkg) and the
// strobe protocol are this design's own.
module mmio_if
  import sapphire_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  input  logic [15:0]   addr,
  input  logic [31:0]   wdata,
  input  logic          wen,
  input  logic          ren,
  output logic [31:0]   rdata,
  input  logic          busy,
  input  logic          irq,
  // polynomial cache (one port)
  output cache_req_t    cache_req,
  input  logic [W-1:0]  cache_rdata,
  // NTT constants RAM
  output logic          const_en,
  output logic          const_we,
  output logic [12:0]   const_addr,
  output logic [W-1:0]  const_wdata,
  input  logic [W-1:0]  const_rdata,
  // instruction memory
  output logic          imem_en,
  output logic          imem_we,
  output logic [7:0]    imem_addr,
  output logic [31:0]   imem_wdata,
  input  logic [31:0]   imem_rdata,
  // CDT table
  output logic          cdt_en,
  output logic          cdt_we,
  output logic [5:0]    cdt_addr,
  output logic [31:0]   cdt_wdata,
  input  logic [31:0]   cdt_rdata,
  // seeds and control
  output logic [255:0]  seed0,
  output logic [255:0]  seed1,
  input  logic [1:0]    c_seed_we,   // core writes a SHA-3 digest: {r1, r0}
  input  logic [255:0]  c_seed0,
  input  logic [255:0]  c_seed1,
  output logic          start,
  output logic          cfg_we,
  output logic          q_we,
  output logic          m_we,
  output logic          k_we,
  input  logic [3:0]    logn,
  input  logic [3:0]    qmode,
  input  logic [W-1:0]  q,
  input  logic [W-1:0]  m,
  input  logic [5:0]    k,
  input  logic [W-1:0]  reg_val,
  input  logic [W-1:0]  tmp_val,
  input  logic [31:0]   cycles,
  input  logic [31:0]   stats [6]  // rejected, branches, NTT copies, trinary retries, flag, permutations
);
  typedef enum logic [2:0] { R_NONE, R_CACHE, R_CONST, R_IMEM, R_CDT, R_REG } rsrc_e;

  logic  in_cache, in_const, in_imem, in_cdt, in_seed, in_ctrl;
  rsrc_e rsrc_q;
  logic [31:0] reg_rd, reg_rd_q;

  assign in_cache = (addr < 16'h2000);
  assign in_const = (addr >= MM_CONST) && (addr < MM_CONST + 16'd5120);
  assign in_imem  = (addr[15:8] == MM_IMEM[15:8]);
  assign in_cdt   = (addr[15:6] == MM_CDT[15:6]);
  assign in_seed  = (addr[15:4] == MM_SEED[15:4]);
  assign in_ctrl  = (addr[15:4] == MM_CTRL[15:4]);

  always_comb begin
    cache_req.en    = (wen || ren) && in_cache && !busy;
    cache_req.we    = wen;
    cache_req.bank  = addr[12];
    cache_req.addr  = addr[11:0];
    cache_req.wdata = wdata[W-1:0];
    const_en    = (wen || ren) && in_const && !busy;
    const_we    = wen;
    const_addr  = 13'(addr - MM_CONST);
    const_wdata = wdata[W-1:0];
    imem_en     = (wen || ren) && in_imem && !busy;
    imem_we     = wen;
    imem_addr   = addr[7:0];
    imem_wdata  = wdata;
    cdt_en      = (wen || ren) && in_cdt && !busy;
    cdt_we      = wen;
    cdt_addr    = addr[5:0];
    cdt_wdata   = wdata;
    start  = wen && (addr == MM_CTRL) && !busy;
    cfg_we = wen && (addr == MM_CFG);
    q_we   = wen && (addr == MM_Q);
    m_we   = wen && (addr == MM_M);
    k_we   = wen && (addr == MM_K);
  end

  // register read mux
  always_comb begin
    reg_rd = '0;
    if (in_seed)
      reg_rd = addr[3] ? seed1[32*addr[2:0] +: 32] : seed0[32*addr[2:0] +: 32];
    else
      unique case (addr)
        MM_CTRL:   reg_rd = {30'd0, irq, busy};
        MM_CFG:    reg_rd = {24'd0, qmode, logn};
        MM_Q:      reg_rd = 32'(q);
        MM_M:      reg_rd = 32'(m);
        MM_K:      reg_rd = 32'(k);
        MM_REG:    reg_rd = 32'(reg_val);
        MM_TMP:    reg_rd = 32'(tmp_val);
        MM_CYCLES: reg_rd = cycles;
        default:   reg_rd = (addr >= MM_STAT && addr < MM_STAT + 16'd6) ? stats[3'(addr - MM_STAT)] : '0;
      endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      seed0 <= '0; seed1 <= '0; rsrc_q <= R_NONE; reg_rd_q <= '0;
    end else begin
      if (c_seed_we[0]) seed0 <= c_seed0;
      if (c_seed_we[1]) seed1 <= c_seed1;
      if (wen && in_seed && !busy) begin
        if (addr[3]) seed1[32*addr[2:0] +: 32] <= wdata;
        else         seed0[32*addr[2:0] +: 32] <= wdata;
      end
      if (ren) begin
        reg_rd_q <= reg_rd;
        if (busy && !(in_seed || in_ctrl)) rsrc_q <= R_NONE;
        else if (in_cache) rsrc_q <= R_CACHE;
        else if (in_const) rsrc_q <= R_CONST;
        else if (in_imem)  rsrc_q <= R_IMEM;
        else if (in_cdt)   rsrc_q <= R_CDT;
        else if (in_seed || in_ctrl) rsrc_q <= R_REG;
        else rsrc_q <= R_NONE;
      end
    end
  end

  // the memory outputs hold their last read value, so RDATA is stable
  always_comb
    unique case (rsrc_q)
      R_CACHE: rdata = 32'(cache_rdata);
      R_CONST: rdata = 32'(const_rdata);
      R_IMEM:  rdata = imem_rdata;
      R_CDT:   rdata = cdt_rdata;
      R_REG:   rdata = reg_rd_q;
      default: rdata = '0;
    endcase
endmodule
