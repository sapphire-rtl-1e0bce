// prng: SHAKE-128 / SHAKE-256 pseudo-random word generator on the Keccak core.
//
// On start it clears the Keccak state, absorbs one padded block made of the
// 256-bit seed followed by the 16-bit counters c0 and c1 (little-endian bytes;
// this message layout is this design's choice, the paper only says that a seed
// register and two counters select the stream), runs the permutation and then
// hands out the rate part of the state 32 bits at a time (42 words for
// SHAKE-128, 34 for SHAKE-256). When the consumer has taken the last rate word
// the core permutes again (24 cycles) before the next word is valid, which is
// the squeeze phase of SHAKE. Words are picked from the state by a word counter
// rather than by shifting the 1600-bit register.
// The same Keccak core also serves the SHA-3 instructions (SHA3-256 and
// SHA3-512). h_init clears the state and selects the rate (34 words for
// SHA3-256, 18 for SHA3-512); every 32-bit word offered on h_word/h_wvalid is
// XORed into the next rate position in one cycle, and when the rate is full the
// core permutes (24 cycles, h_wready low meanwhile). h_final pads the message
// with 0x06 ... 0x80 and permutes a last time; h_done then pulses and digest
// holds the first 512 bits of the state (the first 256 for SHA3-256). Messages
// are whole 32-bit words; the byte order inside a word is little-endian, as in
// FIPS 202's byte string. The paper names the SHA-3 instructions but not how
// the data reach the core: word-wise absorption is this design's choice.
// Interface: start, shake256, seed, c0, c1 in; word/valid out with ready in
// (a word is consumed when valid and ready are both high); perms counts
// permutations since start or h_init (for statistics). Keccak clock is the caller's.
module prng (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic          shake256,
  input  logic [255:0]  seed,
  input  logic [15:0]   c0,
  input  logic [15:0]   c1,
  input  logic          stop,      // return to idle
  output logic [31:0]   word,
  output logic          valid,
  input  logic          ready,
  output logic [15:0]   perms,
  // SHA-3 hashing
  input  logic          h_init,
  input  logic          h_512,
  input  logic [31:0]   h_word,
  input  logic          h_wvalid,
  output logic          h_wready,
  input  logic          h_final,
  output logic          h_done,
  output logic [511:0]  digest
);
  typedef enum logic [3:0] {S_IDLE, S_CLEAR, S_ABSORB, S_PERM, S_WAIT, S_SERVE,
                            S_H_CLR, S_H_ABS, S_H_PERM, S_H_WAIT, S_H_PAD, S_H_FPERM, S_H_FWAIT} st_e;
  st_e st;

  logic          k_clear, k_absorb, k_permute, k_busy, k_done;
  logic [1599:0] blk, state;
  logic [5:0]    widx;
  logic          s256_q;
  logic [255:0]  seed_q;
  logic [31:0]   ctr_q;
  logic [5:0]    rate_words;
  logic          h512_q;
  logic [5:0]    hidx, h_rate;

  assign rate_words = s256_q ? 6'd34 : 6'd42;
  assign h_rate     = h512_q ? 6'd18 : 6'd34;

  keccak_core u_keccak (
    .clk(clk), .rst(rst), .clear(k_clear), .absorb(k_absorb), .blk(blk),
    .permute(k_permute), .state(state), .busy(k_busy), .done(k_done));

  always_comb begin
    blk = '0;
    if (st == S_H_ABS) begin
      for (int i = 0; i < 34; i++)
        if (hidx == 6'(i)) blk[32*i +: 32] = h_word;
    end else if (st == S_H_PAD) begin
      for (int i = 0; i < 34; i++)
        if (hidx == 6'(i)) blk[32*i +: 8] = 8'h06;   // SHA-3 domain bits and first pad bit
      if (h512_q) blk[575] = 1'b1;                   // last pad bit at end of the rate
      else        blk[1087] = 1'b1;
    end else begin
      blk[255:0]   = seed_q;
      blk[287:256] = ctr_q;
      blk[295:288] = 8'h1F;                 // SHAKE domain bits and first pad bit
      if (s256_q) blk[1087] = 1'b1;         // last pad bit at end of the rate
      else        blk[1343] = 1'b1;
    end
  end

  assign h_wready  = (st == S_H_ABS) && !h_final;
  assign k_clear   = (st == S_CLEAR) || (st == S_H_CLR);
  assign k_absorb  = (st == S_ABSORB) || (st == S_H_PAD) || (h_wready && h_wvalid);
  assign k_permute = (st == S_PERM) || (st == S_H_PERM) || (st == S_H_FPERM);
  assign valid     = (st == S_SERVE);
  assign word      = state[32*widx +: 32];
  assign h_done    = (st == S_H_FWAIT) && k_done;
  assign digest    = state[511:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; widx <= '0; s256_q <= 1'b0; seed_q <= '0; ctr_q <= '0; perms <= '0;
      h512_q <= 1'b0; hidx <= '0;
    end else if (stop) begin
      st <= S_IDLE;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          s256_q <= shake256; seed_q <= seed; ctr_q <= {c1, c0}; perms <= '0;
          st <= S_CLEAR;
        end else if (h_init) begin
          h512_q <= h_512; hidx <= '0; perms <= '0;
          st <= S_H_CLR;
        end
        S_CLEAR:  st <= S_ABSORB;
        S_ABSORB: st <= S_PERM;
        S_PERM:   begin st <= S_WAIT; perms <= perms + 16'd1; end
        S_WAIT:   if (k_done) begin st <= S_SERVE; widx <= '0; end
        S_SERVE:  if (ready) begin
          if (widx == rate_words - 6'd1) st <= S_PERM;
          else widx <= widx + 6'd1;
        end
        S_H_CLR: st <= S_H_ABS;
        S_H_ABS:
          if (h_final) st <= S_H_PAD;
          else if (h_wvalid) begin
            if (hidx == h_rate - 6'd1) begin hidx <= '0; st <= S_H_PERM; end
            else hidx <= hidx + 6'd1;
          end
        S_H_PERM:  begin st <= S_H_WAIT; perms <= perms + 16'd1; end
        S_H_WAIT:  if (k_done) st <= S_H_ABS;
        S_H_PAD:   st <= S_H_FPERM;
        S_H_FPERM: begin st <= S_H_FWAIT; perms <= perms + 16'd1; end
        S_H_FWAIT: if (k_done) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
