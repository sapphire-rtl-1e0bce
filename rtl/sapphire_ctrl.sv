// sapphire_ctrl: instruction decoder and control unit of the Sapphire core.
//
// Fetches 32-bit instructions from the instruction memory (one-cycle read) and
// sequences them; a simple instruction takes two cycles (fetch, decode and
// execute). It owns the programmer-visible registers: the 24-bit reg and tmp,
// the 16-bit counters c0 and c1, the 2-bit comparison flag, the configuration
// (lg n, modulus mode, q, m, k) and the three clock-gate enables.
// Multi-cycle instructions:
//  * coefficient passes (init, poly_copy, poly_op, mult_psi(_inv), shift_poly,
//    BITREV, sum_elems, max_elems, eq_check, inf_norm_check): a counter reads
//    coefficient i in cycle i and writes the ALU result in cycle i+1, so a pass
//    over n coefficients takes n + 1 cycles (the paper's n + 1 for the psi
//    multiplication). Two-operand passes read poly_src and poly_dst in the same
//    cycle, so the two must lie in different banks.
//  * transform: handed to ntt_ctrl, which drives the cache and twiddle RAM.
//  * sampling: starts the PRNG on the selected seed with c0 and c1, starts the
//    sampler and writes each accepted sample to the next coefficient; the
//    trinary modes with a fixed number of non-zeros first clear the polynomial,
//    then read the drawn position and write it only if it is still zero.
//  * SHA-3: sha3_init selects SHA3-256 or SHA3-512 and clears the Keccak state;
//    absorb streams the eight 32-bit words of r0 or r1, or the n coefficients of
//    a polynomial (each zero-extended to a 32-bit word), into the hasher, one
//    word per cycle except while the Keccak core permutes; digest pads,
//    permutes and writes the result to r0 or r1 (SHA3-256) or r0 || r1
//    (SHA3-512). The word format of the absorbed data is this design's choice.
// The instruction encoding is this design's own (sapphire_pkg); the paper only
// lists the instructions. END stops the program and raises the interrupt.
// Polynomial p of length n = 2^lgn occupies cache words [p*n, p*n + n): the
// upper half of the 8192 words is the right bank.
// Interface: program start from the host, instruction memory port, four cache
// ports, twiddle RAM port, ALU operands and results, PRNG and sampler control,
// host configuration writes; busy, irq, registers and statistics out.
module sapphire_ctrl
  import sapphire_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic          busy,
  output logic          irq,
  // host configuration writes
  input  logic          h_cfg_we,
  input  logic [7:0]    h_cfg,
  input  logic          h_q_we,
  input  logic          h_m_we,
  input  logic          h_k_we,
  input  logic [W-1:0]  h_wdata,
  // configuration out
  output logic [3:0]    logn,
  output logic [3:0]    qmode,
  output logic [W-1:0]  q,
  output logic [W-1:0]  m,
  output logic [5:0]    k,
  output logic [2:0]    clk_en,      // {keccak, ntt, sampler}
  // instruction memory
  output logic          imem_en,
  output logic [7:0]    imem_addr,
  input  logic [31:0]   imem_rdata,
  // polynomial cache
  output cache_req_t    creq [4],
  input  logic [W-1:0]  crdata [4],
  // NTT constants RAM
  output logic          tw_en,
  output logic [12:0]   tw_addr,
  input  logic [W-1:0]  tw_rdata,
  // ALU
  output alu_op_e       alu_op,
  output logic [W-1:0]  alu_a,
  output logic [W-1:0]  alu_b,
  output logic [W-1:0]  alu_w,
  output logic          alu_wneg,
  input  logic [W-1:0]  alu_y0,
  input  logic [W-1:0]  alu_y1,
  // NTT sequencer (ntt_ctrl)
  output logic          ntt_start,
  output tr_mode_e      ntt_mode,
  output logic          ntt_src_bank,
  output logic [11:0]   ntt_src_base,
  output logic          ntt_dst_bank,
  output logic [11:0]   ntt_dst_base,
  input  logic          ntt_done,
  input  logic          ntt_dif,
  input  logic          n_rd_en,
  input  logic          n_rd_bank,
  input  logic [11:0]   n_rd_a0,
  input  logic [11:0]   n_rd_a1,
  input  logic          n_tw_en,
  input  logic [12:0]   n_tw_addr,
  input  logic          n_wr_en,
  input  logic          n_wr_bank,
  input  logic [11:0]   n_wr_a0,
  input  logic [11:0]   n_wr_a1,
  input  logic          n_wr_copy,
  input  logic          n_tw_neg,
  // PRNG
  output logic          prng_start,
  output logic          prng_stop,
  output logic          prng_shake256,
  output logic          prng_seed_sel,
  output logic [15:0]   prng_c0,
  output logic [15:0]   prng_c1,
  // SHA-3 hashing on the PRNG's Keccak core
  output logic          h_init,
  output logic          h_512,
  output logic [31:0]   h_word,
  output logic          h_wvalid,
  input  logic          h_wready,
  output logic          h_final,
  input  logic          h_done,
  input  logic [255:0]  seed0,
  input  logic [255:0]  seed1,
  output logic [1:0]    seed_we,     // {r1, r0} take the digest
  // sampler
  output logic          smp_start,
  output logic          smp_stop,
  output samp_type_e    smp_type,
  output logic [14:0]   smp_param,
  output logic          smp_tri2_neg,
  input  logic          smp_valid,
  input  logic          smp_accept,
  input  logic [W-1:0]  smp_value,
  input  logic [10:0]   smp_pos,
  output logic          smp_ready,
  // registers and statistics
  output logic [W-1:0]  reg_q,
  output logic [W-1:0]  tmp_q,
  output logic [1:0]    flag_q,
  output logic [31:0]   cycles,
  output logic [31:0]   n_rejected,
  output logic [31:0]   n_branches,
  output logic [31:0]   n_ntt_copy,
  output logic [31:0]   n_tri_retry
);
  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_PASS, S_NTT, S_SAMP_INIT, S_SAMP, S_TRI_CHECK,
    S_RDREG, S_HASH, S_HASH_FIN
  } st_e;

  typedef enum logic [3:0] {
    P_INIT, P_COPY, P_OP, P_PSI, P_PSI_INV, P_SHIFT, P_SUM, P_MAX,
    P_EQ, P_INF
  } pass_e;

  st_e         st;
  pass_e       pk;
  logic [31:0] ir;
  logic [7:0]  pc;
  logic [15:0] c0_q, c1_q;
  logic [11:0] i_cnt;           // read index / sample count
  logic [11:0] i_d;             // index of the word being written
  logic        v_d;             // write phase valid
  logic [W-1:0] acc;
  logic        ok;
  logic [3:0]  qmode_q;
  logic [5:0]  pow2_k;
  logic [W-1:0] hq, hm;
  logic [5:0]  hk;
  logic [10:0] tri_pos;
  logic [W-1:0] tri_val;

  logic [11:0] n;
  logic        ntt_copy_seen;   // the running transform needed the final copy pass
  logic        h_pend;          // a coefficient read for hashing waits on crdata[0]
  logic        h_issue;         // read the next coefficient to hash
  logic        h_seed;          // the running absorb takes a seed register

  assign n  = 12'd1 << logn;
  assign busy = (st != S_IDLE);

  // polynomial number to {bank, base}
  function automatic logic [12:0] paddr(input logic [6:0] p, input logic [3:0] ln);
    return 13'({6'b0, p} << ln);
  endfunction

  // instruction being decoded (straight from memory) or executed (latched)
  logic [31:0] cur;
  assign cur = (st == S_DECODE) ? imem_rdata : ir;

  logic [6:0]  f_dst, f_src;
  logic [12:0] a_dst, a_src;
  logic [3:0]  po;
  assign f_dst   = cur[22:16];
  assign f_src   = cur[15:9];
  assign a_dst   = paddr(f_dst, logn);
  assign a_src   = paddr(f_src, logn);
  assign po      = cur[26:23];
  assign ntt_mode     = tr_mode_e'(cur[26:25]);
  assign ntt_src_bank = a_src[12];
  assign ntt_src_base = a_src[11:0];
  assign ntt_dst_bank = a_dst[12];
  assign ntt_dst_base = a_dst[11:0];

  // configuration
  assign qmode = qmode_q;
  always_comb begin
    if (qmode_q < 4'(NPRIMES)) begin
      q = prime_info(qmode_q).q; m = prime_info(qmode_q).m; k = prime_info(qmode_q).k;
    end else if (qmode_q == QM_CONFIG) begin
      q = hq; m = hm; k = hk;
    end else begin
      q = W'(1) << pow2_k; m = '0; k = pow2_k;
    end
  end

  // ---------------------------------------------------------------------------
  // datapath control (combinational)
  // ---------------------------------------------------------------------------
  logic        rd_phase;
  logic [11:0] w_idx;
  logic [W-1:0] src_x, dst_x;
  logic [W-1:0] x_abs;

  assign rd_phase = (i_cnt < n);
  assign src_x = crdata[0];
  assign dst_x = crdata[1];

  always_comb begin
    // write index of the pass
    unique case (pk)
      P_OP:     w_idx = (poly_op_e'(po) == PO_BITREV) ? 12'(bitrev11(11'(i_d), logn)) : i_d;
      P_SHIFT:  w_idx = (i_d + 12'd1) & (n - 12'd1);
      default:  w_idx = i_d;
    endcase
    x_abs = (src_x > (q >> 1)) ? q - src_x : src_x;
  end

  // element index of reg <-> poly transfers
  logic [11:0] ix;
  always_comb begin
    unique case (cur[24:23])
      2'd1:    ix = c0_q[11:0];
      2'd2:    ix = c1_q[11:0];
      default: ix = cur[11:0];
    endcase
    ix = ix & (n - 12'd1);
  end

  function automatic cache_req_t rq(input logic en, input logic we, input logic [12:0] base,
                                     input logic [11:0] idx, input logic [W-1:0] d);
    cache_req_t r;
    r.en = en; r.we = we; r.bank = base[12]; r.addr = base[11:0] + idx; r.wdata = d;
    return r;
  endfunction

  always_comb begin
    for (int p = 0; p < 4; p++) creq[p] = '0;
    imem_en   = (st == S_FETCH);
    imem_addr = pc;
    tw_en     = 1'b0;
    tw_addr   = '0;
    alu_op    = ALU_PASSB;
    alu_a     = '0;
    alu_b     = '0;
    alu_w     = '0;
    alu_wneg  = 1'b0;
    smp_ready = 1'b0;
    ntt_start = 1'b0;
    h_word    = '0;
    h_wvalid  = 1'b0;

    unique case (st)
      S_DECODE: begin
        // register arithmetic uses the ALU: tmp = tmp (op) reg
        alu_a = tmp_q;
        alu_b = reg_q;
        unique case (cur[26:24])
          3'd0: alu_op = ALU_ADD;
          3'd1: alu_op = ALU_SUB;
          3'd2: alu_op = ALU_MUL;
          3'd3: alu_op = ALU_AND;
          3'd4: alu_op = ALU_OR;
          3'd5: alu_op = ALU_XOR;
          3'd6: alu_op = ALU_RSHIFT;
          default: alu_op = ALU_LSHIFT;
        endcase
        if (opcode_e'(cur[31:27]) == OP_TRANSFORM) ntt_start = 1'b1;
        // single-word reads and writes
        if (opcode_e'(cur[31:27]) == OP_REG_POLY && cur[26:25] == 2'd2)
          creq[0] = rq(1'b1, 1'b0, a_dst, ix, '0);
        else if (opcode_e'(cur[31:27]) == OP_POLY_REG)
          creq[2] = rq(1'b1, 1'b1, a_dst, ix, reg_q);
      end

      S_PASS: begin
        // read phase
        if (rd_phase) begin
          unique case (pk)
            P_INIT: ;
            P_PSI, P_PSI_INV, P_SUM, P_MAX, P_INF: creq[0] = rq(1'b1, 1'b0, a_dst, i_cnt, '0);
            P_OP, P_EQ: begin
              creq[0] = rq(1'b1, 1'b0, a_src, i_cnt, '0);
              if (!(pk == P_OP && po >= 4'(PO_BITREV))) creq[1] = rq(1'b1, 1'b0, a_dst, i_cnt, '0);
              else creq[1] = '0;
            end
            default: creq[0] = rq(1'b1, 1'b0, a_src, i_cnt, '0);
          endcase
          if (pk == P_PSI)     begin tw_en = 1'b1; tw_addr = 13'(n >> 1) + 13'(i_cnt); end
          if (pk == P_PSI_INV) begin tw_en = 1'b1; tw_addr = 13'(n >> 1) + 13'(n) + 13'(i_cnt); end
        end
        // write phase
        unique case (pk)
          P_INIT:  if (rd_phase) creq[2] = rq(1'b1, 1'b1, a_dst, i_cnt, '0);
          P_COPY:  begin alu_op = ALU_PASSB; alu_b = src_x; end
          P_PSI, P_PSI_INV: begin alu_op = ALU_MUL; alu_a = src_x; alu_b = tw_rdata; end
          P_SHIFT: begin
            alu_b = src_x;
            if (i_d == n - 12'd1 && !ir[26]) begin alu_op = ALU_SUB; alu_a = '0; end
            else alu_op = ALU_PASSB;
          end
          P_SUM:   begin alu_op = ALU_ADD; alu_a = acc; alu_b = src_x; end
          P_OP: begin
            alu_a = src_x;
            alu_b = (po >= 4'(PO_CADD)) ? reg_q : dst_x;
            unique case (poly_op_e'(po))
              PO_ADD, PO_CADD:     alu_op = ALU_ADD;
              PO_SUB, PO_CSUB:     alu_op = ALU_SUB;
              PO_MUL, PO_CMUL:     alu_op = ALU_MUL;
              PO_CAND:             alu_op = ALU_AND;
              PO_COR:              alu_op = ALU_OR;
              PO_CXOR:             alu_op = ALU_XOR;
              PO_CRSHIFT:          alu_op = ALU_RSHIFT;
              PO_CLSHIFT:          alu_op = ALU_LSHIFT;
              default:             begin alu_op = ALU_PASSB; alu_b = src_x; end
            endcase
          end
          default: ;
        endcase
        if (v_d && pk inside {P_COPY, P_PSI, P_PSI_INV, P_SHIFT, P_OP}) begin
          creq[2] = rq(1'b1, 1'b1, a_dst, w_idx, alu_y0);
        end
      end

      S_NTT: begin
        alu_op   = ntt_dif ? ALU_BF_DIF : ALU_BF_DIT;
        alu_a    = crdata[0];
        alu_b    = crdata[1];
        alu_w    = tw_rdata;
        alu_wneg = n_tw_neg;
        creq[0]  = '{en: n_rd_en, we: 1'b0, bank: n_rd_bank, addr: n_rd_a0, wdata: '0};
        creq[1]  = '{en: n_rd_en, we: 1'b0, bank: n_rd_bank, addr: n_rd_a1, wdata: '0};
        creq[2]  = '{en: n_wr_en, we: 1'b1, bank: n_wr_bank, addr: n_wr_a0,
                     wdata: n_wr_copy ? crdata[0] : alu_y0};
        creq[3]  = '{en: n_wr_en, we: 1'b1, bank: n_wr_bank, addr: n_wr_a1,
                     wdata: n_wr_copy ? crdata[1] : alu_y1};
        tw_en    = n_tw_en;
        tw_addr  = n_tw_addr;
      end

      S_SAMP_INIT: creq[2] = rq(1'b1, 1'b1, a_dst, i_cnt, '0);

      S_SAMP: begin
        if (smp_type == SM_TRI1 || smp_type == SM_TRI2) begin
          smp_ready = smp_valid;
          if (smp_valid) creq[0] = rq(1'b1, 1'b0, a_dst, 12'(smp_pos), '0);
        end else begin
          smp_ready = 1'b1;
          if (smp_valid && smp_accept) creq[2] = rq(1'b1, 1'b1, a_dst, i_cnt, smp_value);
        end
      end

      S_TRI_CHECK:
        if (crdata[0] == '0) creq[2] = rq(1'b1, 1'b1, a_dst, 12'(tri_pos), tri_val);

      S_HASH:
        if (h_seed) begin
          h_wvalid = (i_cnt < 12'd8);
          h_word   = ir[15] ? seed1[32*i_cnt[2:0] +: 32] : seed0[32*i_cnt[2:0] +: 32];
        end else begin
          h_wvalid = h_pend;
          h_word   = 32'(crdata[0]);
          if (h_issue) creq[0] = rq(1'b1, 1'b0, a_dst, i_cnt, '0);
        end

      default: ;
    endcase
  end

  // hashing: a coefficient is read while none waits or the waiting one is taken
  assign h_seed  = (ir[26:24] == 3'(SH_ABS_SEED));
  assign h_issue = (st == S_HASH) && !h_seed && (i_cnt < n) && (!h_pend || h_wready);
  assign h_final = (st == S_HASH_FIN);

  // sampling set-up
  assign smp_type      = samp_type_e'(ir[26:24]);
  assign smp_param     = ir[14:0];
  assign smp_tri2_neg  = (i_cnt >= ir[11:0]);
  assign prng_shake256 = ir[23];
  assign prng_seed_sel = ir[15];
  assign prng_c0       = c0_q;
  assign prng_c1       = c1_q;

  logic [11:0] tri_target;
  assign tri_target = (smp_type == SM_TRI2) ? ir[11:0] + reg_q[11:0] : ir[11:0];

  // ---------------------------------------------------------------------------
  // sequential part
  // ---------------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; pk <= P_INIT; ir <= '0; pc <= '0; irq <= 1'b0;
      c0_q <= '0; c1_q <= '0; reg_q <= '0; tmp_q <= '0; flag_q <= FLAG_EQ;
      logn <= 4'd8; qmode_q <= 4'd0; pow2_k <= 6'd16; hq <= '0; hm <= '0; hk <= '0;
      clk_en <= 3'b111; i_cnt <= '0; i_d <= '0; v_d <= 1'b0; acc <= '0; ok <= 1'b1;
      tri_pos <= '0; tri_val <= '0;
      prng_start <= 1'b0; prng_stop <= 1'b0; smp_start <= 1'b0; smp_stop <= 1'b0;
      h_init <= 1'b0; h_512 <= 1'b0; h_pend <= 1'b0; seed_we <= '0;
      cycles <= '0; n_rejected <= '0; n_branches <= '0; n_ntt_copy <= '0; n_tri_retry <= '0;
    end else begin
      prng_start <= 1'b0; prng_stop <= 1'b0; smp_start <= 1'b0; smp_stop <= 1'b0;
      h_init <= 1'b0; seed_we <= '0;
      if (st != S_IDLE) cycles <= cycles + 32'd1;
      // host configuration
      if (st == S_IDLE) begin
        if (h_cfg_we) begin logn <= h_cfg[3:0]; qmode_q <= h_cfg[7:4]; end
        if (h_q_we) hq <= h_wdata;
        if (h_m_we) hm <= h_wdata;
        if (h_k_we) begin hk <= h_wdata[5:0]; pow2_k <= h_wdata[5:0]; end
      end

      unique case (st)
        S_IDLE: if (start) begin
          st <= S_FETCH; pc <= '0; irq <= 1'b0; cycles <= '0;
        end

        S_FETCH: st <= S_DECODE;

        S_DECODE: begin
          ir <= imem_rdata;
          pc <= pc + 8'd1;
          st <= S_FETCH;
          i_cnt <= '0; v_d <= 1'b0; acc <= '0; ok <= 1'b1;
          unique case (opcode_e'(imem_rdata[31:27]))
            OP_END: begin st <= S_IDLE; irq <= 1'b1; end
            OP_CONFIG: begin
              logn <= imem_rdata[26:23]; qmode_q <= imem_rdata[22:19];
              if (imem_rdata[22:19] == QM_POW2) pow2_k <= imem_rdata[18:13];
            end
            OP_CLKCFG: clk_en <= imem_rdata[2:0];
            OP_CREG: begin
              if (!imem_rdata[26])
                unique case (imem_rdata[25:24])
                  2'd1:    c0_q <= c0_q + imem_rdata[15:0];
                  2'd2:    c0_q <= c0_q - imem_rdata[15:0];
                  default: c0_q <= imem_rdata[15:0];
                endcase
              else
                unique case (imem_rdata[25:24])
                  2'd1:    c1_q <= c1_q + imem_rdata[15:0];
                  2'd2:    c1_q <= c1_q - imem_rdata[15:0];
                  default: c1_q <= imem_rdata[15:0];
                endcase
            end
            OP_REG_IMM: reg_q <= imem_rdata[23:0];
            OP_TMP_IMM: tmp_q <= imem_rdata[23:0];
            OP_REG_TMP: reg_q <= tmp_q;
            OP_TMP_OP:  tmp_q <= alu_y0;
            OP_COMPARE: begin
              logic [W-1:0] v;
              unique case (imem_rdata[26:25])
                2'd0: v = reg_q;
                2'd1: v = tmp_q;
                2'd2: v = W'(c0_q);
                default: v = W'(c1_q);
              endcase
              flag_q <= (v < imem_rdata[23:0]) ? FLAG_LT : ((v == imem_rdata[23:0]) ? FLAG_EQ : FLAG_GT);
            end
            OP_BRANCH:
              if ((flag_q == imem_rdata[25:24]) != imem_rdata[26]) begin
                pc <= imem_rdata[7:0];
                n_branches <= n_branches + 32'd1;
              end
            OP_TRANSFORM: st <= S_NTT;
            OP_REG_POLY: begin
              st <= S_PASS;
              unique case (imem_rdata[26:25])
                2'd0:    pk <= P_MAX;
                2'd1:    pk <= P_SUM;
                default: st <= S_RDREG;
              endcase
            end
            OP_POLY_REG: ;
            OP_MULT_PSI: begin st <= S_PASS; pk <= imem_rdata[26] ? P_PSI_INV : P_PSI; end
            OP_INIT:      begin st <= S_PASS; pk <= P_INIT; end
            OP_POLY_COPY: begin st <= S_PASS; pk <= P_COPY; end
            OP_POLY_OP:   begin st <= S_PASS; pk <= P_OP; end
            OP_SHIFT:     begin st <= S_PASS; pk <= P_SHIFT; end
            OP_EQ_CHECK:  begin st <= S_PASS; pk <= P_EQ; end
            OP_INF_NORM:  begin st <= S_PASS; pk <= P_INF; end
            OP_SHA3:
              case (sha3_op_e'(imem_rdata[26:24]))
                SH_INIT:     begin h_init <= 1'b1; h_512 <= imem_rdata[23]; end
                SH_ABS_POLY,
                SH_ABS_SEED: begin st <= S_HASH; h_pend <= 1'b0; end
                SH_DIGEST:   st <= S_HASH_FIN;
                default: ;
              endcase
            OP_SAMPLE: begin
              if (imem_rdata[26:24] == 3'(SM_TRI1) || imem_rdata[26:24] == 3'(SM_TRI2))
                st <= S_SAMP_INIT;
              else begin
                st <= S_SAMP; prng_start <= 1'b1; smp_start <= 1'b1;
              end
            end
            default: ;
          endcase
        end

        S_RDREG: begin reg_q <= crdata[0]; st <= S_FETCH; end

        // absorb 8 seed words or n coefficients (zero-extended to 32 bits)
        S_HASH:
          if (h_seed) begin
            if (h_wready) begin
              i_cnt <= i_cnt + 12'd1;
              if (i_cnt == 12'd7) st <= S_FETCH;
            end
          end else begin
            if (h_issue) i_cnt <= i_cnt + 12'd1;
            h_pend <= h_issue || (h_pend && !h_wready);
            if (i_cnt == n && h_pend && h_wready) st <= S_FETCH;
          end

        // pad and permute, then write the digest: r0 or r1 (SHA3-256), r0 || r1 (SHA3-512)
        S_HASH_FIN:
          if (h_done) begin
            st <= S_FETCH;
            seed_we <= h_512 ? 2'b11 : (ir[15] ? 2'b10 : 2'b01);
          end

        S_PASS: begin
          i_cnt <= i_cnt + 12'd1;
          v_d   <= rd_phase;
          i_d   <= i_cnt;
          // accumulate the word read in the previous cycle
          if (v_d) begin
            unique case (pk)
              P_SUM: acc <= alu_y0;
              P_MAX: if (src_x > acc) acc <= src_x;
              P_EQ:  if (src_x != dst_x) ok <= 1'b0;
              P_INF: if (x_abs > reg_q) ok <= 1'b0;
              default: ;
            endcase
          end
          // the last write happens in cycle n: the pass takes n + 1 cycles
          if (!rd_phase) begin
            st <= S_FETCH;
            unique case (pk)
              P_SUM: reg_q <= alu_y0;
              P_MAX: reg_q <= (src_x > acc) ? src_x : acc;
              P_EQ:  flag_q <= (ok && src_x == dst_x) ? FLAG_GT : FLAG_EQ;
              P_INF: flag_q <= (ok && x_abs <= reg_q) ? FLAG_GT : FLAG_EQ;
              default: ;
            endcase
          end
        end

        S_NTT: if (ntt_done) begin
          st <= S_FETCH;
          if (ntt_copy_seen) n_ntt_copy <= n_ntt_copy + 32'd1;
        end

        S_SAMP_INIT: begin
          i_cnt <= i_cnt + 12'd1;
          if (i_cnt == n - 12'd1) begin
            i_cnt <= '0; st <= S_SAMP; prng_start <= 1'b1; smp_start <= 1'b1;
          end
        end

        S_SAMP: begin
          if (smp_type == SM_TRI1 || smp_type == SM_TRI2) begin
            if (smp_valid) begin
              tri_pos <= smp_pos; tri_val <= smp_value; st <= S_TRI_CHECK;
            end
          end else if (smp_valid) begin
            if (!smp_accept) n_rejected <= n_rejected + 32'd1;
            else begin
              i_cnt <= i_cnt + 12'd1;
              if (i_cnt == n - 12'd1) begin
                st <= S_FETCH; prng_stop <= 1'b1; smp_stop <= 1'b1;
              end
            end
          end
        end

        S_TRI_CHECK: begin
          st <= S_SAMP;
          if (crdata[0] == '0) begin
            i_cnt <= i_cnt + 12'd1;
            if (i_cnt + 12'd1 >= tri_target) begin
              st <= S_FETCH; prng_stop <= 1'b1; smp_stop <= 1'b1;
            end
          end else n_tri_retry <= n_tri_retry + 32'd1;
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (rst || st != S_NTT) ntt_copy_seen <= 1'b0;
    else if (n_wr_copy) ntt_copy_seen <= 1'b1;
endmodule
