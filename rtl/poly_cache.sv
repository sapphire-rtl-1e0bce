// poly_cache: the LWE polynomial cache, two banks of four single-port SRAMs.
//
// Each bank (left = 0, right = 1) holds 4096 coefficients in four
// SRAM_DEPTH x 24 SRAMs. Following the paper's memory-bank construction,
// coefficient i of a polynomial of length n = 2^logn is stored in SRAM
// {MSB(i), LSB(i)} (bit logn-1 and bit 0 of i), so the pairs (2j, 2j+1) and
// (j, j + n/2) that a constant-geometry butterfly reads or writes always sit in
// two different SRAMs and one butterfly per cycle needs only single-port memory.
// A port addresses the bank linearly (addr = polynomial-in-bank * n + i); the
// row inside the SRAM is {polynomial-in-bank, i[logn-2:1]} (this design's choice).
//
// Four request ports (cache_req_t) are routed to the eight SRAMs; a port that
// reads gets its SRAM's output back on rdata one cycle later through the read
// multiplexer. Two ports must not hit the same SRAM in one cycle (assertion);
// if they do, the lower-numbered port wins.
// Interface: clk, logn (2..11), req[4] in; rdata[4] out.
module poly_cache
  import sapphire_pkg::*;
#(
  parameter int unsigned SRAM_DEPTH = 1024,
  localparam int unsigned RW = $clog2(SRAM_DEPTH)
) (
  input  logic             clk,
  input  logic [3:0]       logn,
  input  cache_req_t       req   [4],
  output logic [W-1:0]     rdata [4]
);
  logic [2:0]    sel   [4];     // {bank, msb, lsb}
  logic [RW-1:0] row   [4];
  logic          m_en  [8];
  logic          m_we  [8];
  logic [RW-1:0] m_addr[8];
  logic [W-1:0]  m_wd  [8];
  logic [W-1:0]  m_rd  [8];
  logic [2:0]    rsel_q[4];

  // address mapping of each port
  always_comb begin
    for (int p = 0; p < 4; p++) begin
      logic [11:0] a;
      logic [11:0] hi, lo;
      a  = req[p].addr;
      hi = a >> logn;                                   // polynomial within bank
      lo = (a & ((12'd1 << (logn - 4'd1)) - 12'd1)) >> 1; // i[logn-2:1]
      sel[p] = {req[p].bank, a[logn - 4'd1], a[0]};
      row[p] = RW'((hi << (logn - 4'd2)) | lo);
    end
  end

  // route requests to SRAMs, lower port number has priority
  always_comb begin
    for (int s = 0; s < 8; s++) begin
      m_en[s] = 1'b0; m_we[s] = 1'b0; m_addr[s] = '0; m_wd[s] = '0;
      for (int p = 3; p >= 0; p--) begin
        if (req[p].en && sel[p] == 3'(s)) begin
          m_en[s] = 1'b1; m_we[s] = req[p].we; m_addr[s] = row[p]; m_wd[s] = req[p].wdata;
        end
      end
    end
  end

  for (genvar s = 0; s < 8; s++) begin : g_sram
    sram_sp #(.DEPTH(SRAM_DEPTH), .WIDTH(W)) u_sram (
      .clk(clk), .en(m_en[s]), .we(m_we[s]), .addr(m_addr[s]), .wdata(m_wd[s]), .rdata(m_rd[s]));
  end

  // read-data multiplexer
  always_ff @(posedge clk)
    for (int p = 0; p < 4; p++)
      if (req[p].en && !req[p].we) rsel_q[p] <= sel[p];

  always_comb
    for (int p = 0; p < 4; p++) rdata[p] = m_rd[rsel_q[p]];

  // no two enabled ports may address the same SRAM in one cycle
  always_ff @(posedge clk)
    for (int p = 0; p < 4; p++)
      for (int r = p + 1; r < 4; r++)
        assert (!(req[p].en && req[r].en && sel[p] == sel[r]))
          else $error("poly_cache: ports %0d and %0d collide on SRAM %0d", p, r, sel[p]);
endmodule
