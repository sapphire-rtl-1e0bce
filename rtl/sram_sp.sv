// sram_sp: synchronous single-port RAM, the model of one SRAM macro.
//
// One access per clock: with en and we high the word at addr is written; with en
// high and we low it is read and appears on rdata after the clock edge (one
// cycle latency). rdata holds its value while en is low. The paper builds all
// its storage (polynomial cache, NTT constants, instruction memory, CDT table)
// from single-port SRAMs; their read/write timing is not described, so the
// one-cycle registered read is this design's choice. Contents are not reset.
// Interface: clk, en, we, addr, wdata in; rdata out.
module sram_sp #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 24,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
