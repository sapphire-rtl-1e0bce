// ntt_ctrl: sequencer of the constant-geometry NTT over the two cache banks.
//
// Implements the paper's out-of-place constant-geometry transform: in every
// stage the same access pattern is used and input and output ping-pong between
// the left and right banks. One butterfly is issued per cycle:
//   DIT: read a[2j], a[2j+1]   -> write a'[j], a'[j+n/2], twiddle w^e,
//        e = floor(j / 2^(lg n - s)) * 2^(lg n - s)
//   DIF: read a[j], a[j+n/2]   -> write a'[2j], a'[2j+1],
//        e = floor(j / 2^(s-1)) * 2^(s-1)
// for stage s = 1..lg n and j = 0..n/2-1. Reads are issued in cycle t and the
// results written in cycle t+1 (one-cycle SRAM latency, single-cycle
// butterfly); each stage takes n/2 + 1 cycles, the extra cycle keeping the last
// write of a stage apart from the first read of the next, as in the paper's
// cycle count (n/2 + 1) lg n.
// Forward transforms use the stored twiddles w^e (constant RAM address e);
// inverse transforms use w^-e = -w^(n/2-e), i.e. address n/2 - e with tw_neg set
// (address 0, no negation, for e = 0).
// Own choice: when lg n is even the last stage lands back in the source slot, and
// a copy pass of n/2 + 1 cycles (two coefficients per cycle) moves the result to
// the destination; the paper does not say how this case is handled.
// Interface: start with mode/logn/src/dst (bank + linear base address) in; read,
// write and twiddle address streams, copy flag and done out. Timing: registered
// state, combinational address outputs; done pulses one cycle after the last write.
module ntt_ctrl
  import sapphire_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  tr_mode_e    mode,
  input  logic [3:0]  logn,
  input  logic        src_bank,
  input  logic [11:0] src_base,
  input  logic        dst_bank,
  input  logic [11:0] dst_base,
  output logic        busy,
  output logic        done,
  output logic        dif,
  // read side (cycle t)
  output logic        rd_en,
  output logic        rd_bank,
  output logic [11:0] rd_a0,
  output logic [11:0] rd_a1,
  output logic        tw_en,
  output logic [12:0] tw_addr,
  // write side (cycle t+1)
  output logic        wr_en,
  output logic        wr_bank,
  output logic [11:0] wr_a0,
  output logic [11:0] wr_a1,
  output logic        wr_copy,   // write read data unchanged
  output logic        tw_neg
);
  logic        active, copying;
  logic [3:0]  stage;           // 1..logn
  logic [10:0] j;               // 0..n/2
  logic        cur_in_src;      // reading from source slot
  tr_mode_e    mode_q;
  logic [3:0]  logn_q;
  logic        sb_q, db_q;
  logic [11:0] sbase_q, dbase_q;
  logic [10:0] half;
  logic [10:0] e;
  logic [10:0] ra0, ra1, wa0, wa1;
  logic        inverse;

  // write side pipeline registers
  logic        w_v, w_bank, w_copy, w_neg;
  logic [11:0] w_a0, w_a1;

  assign half    = 11'd1 << (logn_q - 4'd1);
  assign inverse = (mode_q == TR_DIF_INTT) || (mode_q == TR_DIT_INTT);
  assign dif     = (mode_q == TR_DIF_NTT) || (mode_q == TR_DIF_INTT);
  assign busy    = active;

  always_comb begin
    // twiddle exponent
    if (dif) e = (j >> (stage - 4'd1)) << (stage - 4'd1);
    else     e = (j >> (logn_q - stage)) << (logn_q - stage);
    // coefficient indices
    if (copying || dif) begin
      ra0 = j; ra1 = j + half;
    end else begin
      ra0 = {j[9:0], 1'b0}; ra1 = {j[9:0], 1'b1};
    end
    if (copying || !dif) begin
      wa0 = j; wa1 = j + half;
    end else begin
      wa0 = {j[9:0], 1'b0}; wa1 = {j[9:0], 1'b1};
    end
  end

  assign rd_en   = active && (j < half);
  assign rd_bank = cur_in_src ? sb_q : db_q;
  assign rd_a0   = (cur_in_src ? sbase_q : dbase_q) + {1'b0, ra0};
  assign rd_a1   = (cur_in_src ? sbase_q : dbase_q) + {1'b0, ra1};
  assign tw_en   = rd_en && !copying;
  assign tw_addr = (inverse && e != 0) ? 13'(half - e) : 13'(e);

  assign wr_en   = w_v;
  assign wr_bank = w_bank;
  assign wr_a0   = w_a0;
  assign wr_a1   = w_a1;
  assign wr_copy = w_copy;
  assign tw_neg  = w_neg;

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0; done <= 1'b0; w_v <= 1'b0; copying <= 1'b0;
      stage <= 4'd1; j <= '0; cur_in_src <= 1'b1;
      mode_q <= TR_DIF_NTT; logn_q <= 4'd2; sb_q <= 1'b0; db_q <= 1'b1;
      sbase_q <= '0; dbase_q <= '0; w_bank <= 1'b0; w_a0 <= '0; w_a1 <= '0;
      w_copy <= 1'b0; w_neg <= 1'b0;
    end else begin
      done <= 1'b0;
      // write stage follows the read stage by one cycle
      w_v    <= rd_en;
      w_bank <= cur_in_src ? db_q : sb_q;
      w_a0   <= (cur_in_src ? dbase_q : sbase_q) + {1'b0, wa0};
      w_a1   <= (cur_in_src ? dbase_q : sbase_q) + {1'b0, wa1};
      w_copy <= copying;
      w_neg  <= inverse && (e != 0);
      if (start && !active) begin
        active <= 1'b1; copying <= 1'b0; stage <= 4'd1; j <= '0; cur_in_src <= 1'b1;
        mode_q <= mode; logn_q <= logn; sb_q <= src_bank; db_q <= dst_bank;
        sbase_q <= src_base; dbase_q <= dst_base;
      end else if (active) begin
        if (j == half) begin
          j <= '0;
          cur_in_src <= !cur_in_src;
          if (copying) begin
            active <= 1'b0; done <= 1'b1;
          end else if (stage == logn_q) begin
            // result now in the slot just written; copy if that is the source
            if (!cur_in_src) copying <= 1'b1;   // last stage wrote the source slot
            else begin active <= 1'b0; done <= 1'b1; end
          end else begin
            stage <= stage + 4'd1;
          end
        end else begin
          j <= j + 11'd1;
        end
      end
    end
  end
endmodule
