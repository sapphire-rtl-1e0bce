// sampler: discrete distribution sampler fed by 32-bit PRNG words.
//
// Each PRNG word is masked to the bit size the distribution needs and turned
// into one candidate sample, with one of seven post-processing modes (type):
//   SM_REJ  uniform in [0,q) by rejection: x < scale*q accepted, where scale is
//           the paper's per-prime bound factor (Table 3, 1 for other moduli), x
//           has ceil(lg(scale*q)) bits and is brought into [0,q) with a small
//           Barrett reduction that reuses the configured m and k.
//   SM_BIN  centred binomial: HW(a) - HW(b) of two k-bit chunks, k <= 32
//           (param[5:0]); k > 16 takes the two chunks from two words.
//   SM_CDT  discrete Gaussian by inversion (paper's Algorithm 9): r1 = r low bits,
//           r0 = sign bit, e = #{z < s : r1 > T[z]}, then (-1)^r0 e. The full
//           table T[0..s-1] is always scanned, one comparison per cycle
//           (constant time). param[13:8] = r (1..32), param[6:0] = s (<= 64).
//           r = 32 takes the sign from a second word.
//   SM_UNI  uniform in [-eta, eta] by rejection: x of param[4:0] bits,
//           accepted if x <= 2 eta (eta from the reg input), value x - eta.
//   SM_TRI1 position pos = low lg n bits, sign = next bit: value +1 or -1.
//   SM_TRI2 position as above, value +1, or -1 when tri2_neg is high.
//   SM_TRI3 x = low k bits (param[2:0]): 0 -> +1, 1 -> -1, else 0.
// Negative values are returned as their residue mod q. For TRI1/TRI2 the caller
// checks that the position is still zero and counts the samples it keeps.
// Every candidate, accepted or not, is offered on out_valid with out_accept.
// Simple modes pass a word straight through in the cycle it arrives (one sample
// per cycle); BIN with k > 16 needs two words, CDT s + 3 cycles per sample.
// Interface: start latches the mode, stop returns to idle; word/word_valid/word_ready from the PRNG;
// cdt_en/cdt_addr/cdt_rdata to the CDT RAM (one-cycle read); out_* to the caller.
module sampler
  import sapphire_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic          stop,
  input  samp_type_e    stype,
  input  logic [14:0]   param,
  input  logic [W-1:0]  reg_val,     // eta (UNI)
  input  logic [3:0]    logn,
  input  logic [3:0]    qmode,
  input  logic [W-1:0]  q,
  input  logic [W-1:0]  m,
  input  logic [5:0]    k,
  input  logic          tri2_neg,
  input  logic [31:0]   word,
  input  logic          word_valid,
  output logic          word_ready,
  output logic          cdt_en,
  output logic [5:0]    cdt_addr,
  input  logic [31:0]   cdt_rdata,
  output logic          out_valid,
  output logic          out_accept,
  output logic [W-1:0]  out_value,
  output logic [10:0]   out_pos,
  input  logic          out_ready
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_W2, S_CDT, S_CDT_OUT} st_e;
  st_e st;

  samp_type_e  ty;
  logic [14:0] prm;
  logic [31:0] w1_q;
  logic [31:0] r1_q;
  logic        r0_q;
  logic [6:0]  z;
  logic [6:0]  e_cnt;

  logic [3:0]  scale;
  logic [27:0] bound;
  logic [4:0]  rej_bits;
  logic [5:0]  bk;
  logic [5:0]  cr;
  logic [6:0]  cs;
  logic        two_words;

  assign bk = prm[5:0];
  assign cr = prm[13:8];
  assign cs = prm[6:0];
  assign two_words = (ty == SM_BIN && bk > 6'd16) || (ty == SM_CDT && cr == 6'd32);

  function automatic logic [31:0] lowmask(input logic [5:0] n);
    return (n >= 6'd32) ? 32'hFFFF_FFFF : ((32'd1 << n) - 32'd1);
  endfunction

  function automatic logic [5:0] popcnt(input logic [31:0] v);
    logic [5:0] c;
    c = '0;
    for (int i = 0; i < 32; i++) c = c + 6'(v[i]);
    return c;
  endfunction

  // signed small value to residue mod q
  function automatic logic [W-1:0] to_res(input logic signed [25:0] v, input logic [W-1:0] qq);
    return (v < 0) ? W'($signed({2'b0, qq}) + v) : W'(v);
  endfunction

  // rejection bound and candidate size
  always_comb begin
    scale = (qmode < 4'(NPRIMES)) ? prime_info(qmode).scale : 4'd1;
    bound = 28'(scale) * 28'(q);
    rej_bits = '0;
    for (int b = 0; b < 28; b++)
      if (((bound - 28'd1) >> b) != 0) rej_bits = 5'(b + 1);
  end

  // combinational post-processing of one candidate
  logic [31:0]  xr, xu;
  logic [6:0]   x3;
  logic [55:0]  bt;
  logic [27:0]  bred;
  logic [W-1:0] v_rej, v_bin, v_uni, v_tri, v_cdt;
  logic         a_rej, a_uni;
  logic [31:0]  lo_w, hi_w;

  always_comb begin
    // rejection sampling in [0, q)
    xr    = word & lowmask(6'(rej_bits));
    a_rej = (28'(xr) < bound);
    bt    = ((56'(xr) * 56'(m)) >> k);
    bred  = 28'(xr) - 28'(bt[27:0] * 28'(q));
    if (bred >= 28'(q)) bred = bred - 28'(q);
    v_rej = (qmode == QM_POW2) ? W'(xr & 32'(q - 24'd1)) : W'(bred);
    // binomial
    if (bk > 6'd16) begin
      lo_w = w1_q & lowmask(bk);
      hi_w = word & lowmask(bk);
    end else begin
      lo_w = word & lowmask(bk);
      hi_w = (word >> bk) & lowmask(bk);
    end
    v_bin = to_res(26'(popcnt(lo_w)) - 26'(popcnt(hi_w)), q);
    // uniform in [-eta, eta]
    xu    = word & lowmask({1'b0, prm[4:0]});
    a_uni = ({8'b0, xu} <= {15'b0, reg_val, 1'b0});
    v_uni = to_res(26'(xu) - 26'(reg_val), q);
    // trinary
    x3 = 7'(word & lowmask({3'b0, prm[2:0]}));
    unique case (ty)
      SM_TRI1: v_tri = word[5'(logn)] ? q - W'(1) : W'(1);
      SM_TRI2: v_tri = tri2_neg ? q - W'(1) : W'(1);
      default: v_tri = (x3 == 7'd0) ? W'(1) : ((x3 == 7'd1) ? q - W'(1) : W'(0));
    endcase
    // Gaussian result
    v_cdt = r0_q ? to_res(-26'(e_cnt), q) : W'(e_cnt);
  end

  assign out_pos = 11'(word & lowmask({2'b0, logn}));

  always_comb begin
    out_valid  = 1'b0;
    out_accept = 1'b1;
    out_value  = '0;
    word_ready = 1'b0;
    cdt_en     = 1'b0;
    cdt_addr   = 6'(z);
    unique case (st)
      S_RUN: begin
        if (ty == SM_CDT || two_words) begin
          word_ready = 1'b1;            // first word is stored
        end else begin
          out_valid  = word_valid;
          word_ready = out_ready;
          unique case (ty)
            SM_REJ:  begin out_value = v_rej; out_accept = a_rej; end
            SM_BIN:  out_value = v_bin;
            SM_UNI:  begin out_value = v_uni; out_accept = a_uni; end
            default: out_value = v_tri;
          endcase
        end
      end
      S_W2: begin
        if (ty == SM_BIN) begin
          out_valid  = word_valid;
          word_ready = out_ready;
          out_value  = v_bin;
        end else begin
          word_ready = 1'b1;            // CDT sign word
        end
      end
      S_CDT: cdt_en = (z < cs);
      S_CDT_OUT: begin
        out_valid = 1'b1;
        out_value = v_cdt;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; ty <= SM_BIN; prm <= '0; w1_q <= '0; r1_q <= '0; r0_q <= 1'b0;
      z <= '0; e_cnt <= '0;
    end else if (stop) begin
      st <= S_IDLE;
    end else if (start) begin
      st <= S_RUN; ty <= stype; prm <= param;
    end else begin
      unique case (st)
        S_RUN: if (word_valid) begin
          if (ty == SM_CDT) begin
            r1_q  <= word & lowmask(cr);
            r0_q  <= word[31];
            z     <= '0;
            e_cnt <= '0;
            st    <= (cr == 6'd32) ? S_W2 : S_CDT;
          end else if (two_words) begin
            w1_q <= word;
            st   <= S_W2;
          end
        end
        S_W2: if (word_valid) begin
          if (ty == SM_BIN) begin
            if (out_ready) st <= S_RUN;
          end else begin
            r0_q <= word[0];
            st   <= S_CDT;
          end
        end
        S_CDT: begin
          // address z issued this cycle, T[z-1] available now
          if (z != 0 && r1_q > cdt_rdata) e_cnt <= e_cnt + 7'd1;
          if (z == cs) st <= S_CDT_OUT;
          else z <= z + 7'd1;
        end
        S_CDT_OUT: if (out_ready) st <= S_RUN;
        default: ;
      endcase
    end
  end
endmodule
