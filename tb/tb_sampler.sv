// tb_sampler: self-checking test of the distribution sampler.
//
// A random word source with random valid gaps stands in for the PRNG and a
// random out_ready for the consumer. Every word the sampler takes is queued;
// for every candidate it offers, the testbench pops the word(s) it used and
// recomputes the candidate with its own model of each distribution:
//   rejection in [0,q) (q = 7681, 12289 with the paper's scale factor 5, a
//   configurable q = 3329 and q = 2^15), centred binomial for k = 2 ... 32,
//   uniform in [-eta, eta], the three trinary modes, and CDT inversion for
//   (s, r) = (20, 16) and (12, 32) against a table loaded into a CDT RAM.
// It checks value, accept flag and position, that the accept rate of
// rejection sampling is in a plausible band, the paper's throughput of one
// candidate per cycle for the direct modes (word source always valid), and
// s + 3 cycles per Gaussian sample for the CDT mode.
module tb_sampler;
  import sapphire_pkg::*;
  logic        clk = 0, rst = 1, start = 0, stop = 0;
  samp_type_e  stype;
  logic [14:0] param;
  logic [23:0] reg_val, q, m, out_value;
  logic [3:0]  logn, qmode;
  logic [5:0]  k;
  logic        tri2_neg;
  logic [31:0] word, cdt_rdata;
  logic        word_valid, word_ready, cdt_en, out_valid, out_accept, out_ready;
  logic [5:0]  cdt_addr;
  logic [10:0] out_pos;
  // CDT RAM, loaded by the testbench before a run
  logic        h_en, h_we;
  logic [5:0]  h_addr;
  logic [31:0] h_wdata;
  logic [31:0] table_m [64];
  int checks = 0, failures = 0;
  int n_out, n_acc, cyc;
  logic always_valid, always_ready;
  logic [31:0] wq [$];

  sampler dut (.clk(clk), .rst(rst), .start(start), .stop(stop), .stype(stype),
    .param(param), .reg_val(reg_val), .logn(logn), .qmode(qmode), .q(q), .m(m), .k(k),
    .tri2_neg(tri2_neg), .word(word), .word_valid(word_valid), .word_ready(word_ready),
    .cdt_en(cdt_en), .cdt_addr(cdt_addr), .cdt_rdata(cdt_rdata), .out_valid(out_valid),
    .out_accept(out_accept), .out_value(out_value), .out_pos(out_pos), .out_ready(out_ready));

  sram_sp #(.DEPTH(64), .WIDTH(32)) u_cdt (.clk(clk), .en(h_en | cdt_en), .we(h_we),
    .addr(h_en ? h_addr : cdt_addr), .wdata(h_wdata), .rdata(cdt_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int popc(input logic [31:0] v);
    int c = 0;
    for (int i = 0; i < 32; i++) c += int'(v[i]);
    return c;
  endfunction

  function automatic logic [31:0] msk(input int b);
    return (b >= 32) ? 32'hFFFF_FFFF : ((32'd1 << b) - 1);
  endfunction

  function automatic logic [23:0] res(input longint v);
    return (v < 0) ? 24'(longint'(q) + v) : 24'(v);
  endfunction

  // word source: holds a word until it is taken
  always @(posedge clk) begin
    if (!rst && (!word_valid || word_ready)) begin
      word       <= $urandom;
      word_valid <= always_valid ? 1'b1 : 1'($urandom_range(0, 9) < 7);
    end
    out_ready <= always_ready ? 1'b1 : 1'($urandom_range(0, 9) < 8);
  end

  // checker: recompute each candidate from the words it consumed
  always @(posedge clk) begin
    cyc++;
    if (word_valid && word_ready) wq.push_back(word);
    if (!rst && out_valid && out_ready) begin
      logic [31:0] w0, w1;
      logic [23:0] ev;
      logic        ea;
      logic [10:0] ep;
      int bits, bound, x, kb, r, s, e;
      w0 = wq.pop_front();
      w1 = '0;
      ea = 1'b1; ep = 11'(w0 & msk(int'(logn)));
      unique case (stype)
        SM_REJ: begin
          bound = int'(q) * ((qmode < 12) ? int'(prime_info(qmode).scale) : 1);
          bits = $clog2(bound);
          x = int'(w0 & msk(bits));
          ea = (x < bound);
          ev = 24'(x % int'(q));
        end
        SM_BIN: begin
          kb = int'(param[5:0]);
          if (kb > 16) begin
            w1 = wq.pop_front();
            ev = res(longint'(popc(w0 & msk(kb))) - longint'(popc(w1 & msk(kb))));
          end else
            ev = res(longint'(popc(w0 & msk(kb))) - longint'(popc((w0 >> kb) & msk(kb))));
        end
        SM_UNI: begin
          x = int'(w0 & msk(int'(param[4:0])));
          ea = (x <= 2 * int'(reg_val));
          ev = res(longint'(x) - longint'(reg_val));
        end
        SM_TRI1: ev = w0[logn] ? q - 24'd1 : 24'd1;
        SM_TRI2: ev = tri2_neg ? q - 24'd1 : 24'd1;
        SM_TRI3: begin
          x = int'(w0 & msk(int'(param[2:0])));
          ev = (x == 0) ? 24'd1 : ((x == 1) ? q - 24'd1 : 24'd0);
        end
        default: begin // CDT
          r = int'(param[13:8]); s = int'(param[6:0]);
          e = 0;
          for (int zz = 0; zz < s; zz++) if ((w0 & msk(r)) > table_m[zz]) e++;
          if (r == 32) begin
            w1 = wq.pop_front();
            ev = w1[0] ? res(-longint'(e)) : 24'(e);
          end else
            ev = w0[31] ? res(-longint'(e)) : 24'(e);
        end
      endcase
      checks++;
      if (out_value !== ev || out_accept !== ea ||
          ((stype == SM_TRI1 || stype == SM_TRI2) && out_pos !== ep)) begin
        failures++;
        $display("FAIL %s: value %0d acc %0d pos %0d, expected %0d %0d %0d (word %h)",
                 stype.name(), out_value, out_accept, out_pos, ev, ea, ep, w0);
      end
      n_out++;
      if (out_accept) n_acc++;
    end
  end

  task automatic set_q(input int sel);
    qmode = 4'(sel); q = prime_info(4'(sel)).q; m = prime_info(4'(sel)).m; k = prime_info(4'(sel)).k;
  endtask

  // run one mode for a number of candidates; returns the cycles taken
  task automatic run(input samp_type_e t, input logic [14:0] p, input int count, output int cycles);
    int c0;
    @(negedge clk);
    stype = t; param = p; start = 1;
    @(negedge clk);
    start = 0;
    n_out = 0; n_acc = 0; c0 = cyc;
    while (n_out < count) @(negedge clk);
    cycles = cyc - c0;
    stop = 1;
    @(negedge clk);
    stop = 0;
    wq.delete();
  endtask

  initial begin
    int cy;
    stype = SM_BIN; param = '0; reg_val = 24'd2; logn = 4'd8; tri2_neg = 0;
    word = '0; word_valid = 0; out_ready = 0; always_valid = 0; always_ready = 0;
    h_en = 0; h_we = 0; h_addr = '0; h_wdata = '0;
    set_q(0);
    repeat (3) @(negedge clk);
    rst = 0;
    // rejection sampling
    set_q(0); run(SM_REJ, '0, 500, cy);
    checks++;
    if (n_acc < 400) begin failures++; $display("FAIL q=7681 accepted only %0d/500", n_acc); end
    set_q(1); run(SM_REJ, '0, 500, cy);
    checks++;
    if (n_acc < 400) begin failures++; $display("FAIL q=12289 accepted only %0d/500", n_acc); end
    qmode = QM_CONFIG; q = 24'd3329; k = 6'd24; m = 24'((64'd1 << 24) / 64'd3329);
    run(SM_REJ, '0, 500, cy);
    qmode = QM_POW2; q = 24'd32768; k = 6'd15; m = '0;
    run(SM_REJ, '0, 300, cy);
    // binomial
    set_q(1);
    for (int kk = 1; kk <= 32; kk = kk * 2) run(SM_BIN, 15'(kk), 200, cy);
    run(SM_BIN, 15'd20, 200, cy);
    // uniform [-eta, eta], eta = 2, 3-bit candidates
    reg_val = 24'd2; run(SM_UNI, 15'd3, 300, cy);
    // trinary
    logn = 4'd8;  run(SM_TRI1, '0, 200, cy);
    logn = 4'd10; tri2_neg = 1; run(SM_TRI2, '0, 100, cy);
    tri2_neg = 0; run(SM_TRI2, '0, 100, cy);
    run(SM_TRI3, 15'd2, 300, cy);
    // CDT table: increasing random 16-bit thresholds, then 32-bit ones
    begin
      logic [31:0] acc16 = 0, acc32 = 0;
      for (int i = 0; i < 64; i++) begin
        acc16 = (i < 20) ? acc16 + 32'($urandom_range(1000, 3200)) : 32'hFFFF;
        table_m[i] = acc16;
      end
      for (int i = 0; i < 64; i++) begin
        @(negedge clk); h_en = 1; h_we = 1; h_addr = 6'(i); h_wdata = table_m[i];
      end
      @(negedge clk); h_en = 0; h_we = 0;
      run(SM_CDT, {1'b0, 6'd16, 1'b0, 7'd20}, 100, cy);
      for (int i = 0; i < 64; i++) begin
        acc32 = acc32 + $urandom_range(32'h0100_0000, 32'h1400_0000);
        table_m[i] = acc32;
      end
      for (int i = 0; i < 64; i++) begin
        @(negedge clk); h_en = 1; h_we = 1; h_addr = 6'(i); h_wdata = table_m[i];
      end
      @(negedge clk); h_en = 0; h_we = 0;
      run(SM_CDT, {1'b0, 6'd32, 1'b0, 7'd12}, 100, cy);
    end
    // throughput with an always-valid source and an always-ready consumer
    always_valid = 1; always_ready = 1;
    repeat (3) @(negedge clk);
    set_q(0);
    run(SM_REJ, '0, 256, cy);
    checks++;
    if (cy > 258) begin failures++; $display("FAIL rejection: %0d cycles for 256 candidates", cy); end
    run(SM_BIN, 15'd4, 256, cy);
    checks++;
    if (cy > 258) begin failures++; $display("FAIL binomial: %0d cycles for 256 samples", cy); end
    run(SM_CDT, {1'b0, 6'd16, 1'b0, 7'd12}, 50, cy);
    checks++;
    if (cy < 50 * 15 - 2 || cy > 50 * 15 + 2) begin
      failures++; $display("FAIL CDT: %0d cycles for 50 samples, expected about %0d", cy, 50 * 15);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
