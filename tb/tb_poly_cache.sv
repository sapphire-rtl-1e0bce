// tb_poly_cache: self-checking test of the polynomial cache.
//
// For lg n = 8, 9, 10 and 6 it fills both banks (8192 words) through port 0 with
// random values and a reference copy, then reads them back four at a time in
// the patterns the NTT uses: ports 0/1 read coefficients (2j, 2j+1) of a left-
// bank polynomial while ports 2/3 read (j, j + n/2) of a right-bank one, and
// checks all four results one cycle later. A final phase writes through ports
// 2 and 3 (j, j + n/2 of one polynomial) while ports 0 and 1 read (2j, 2j+1) of
// a polynomial in the other bank, as a butterfly does, and checks the writes.
module tb_poly_cache;
  import sapphire_pkg::*;
  logic        clk = 0;
  logic [3:0]  logn;
  cache_req_t  req [4];
  logic [23:0] rdata [4];
  logic [23:0] ref_mem [8192];
  int checks = 0, failures = 0;

  poly_cache #(.SRAM_DEPTH(1024)) dut (.clk(clk), .logn(logn), .req(req), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cache_req_t mk(input logic en, input logic we, input int ga, input logic [23:0] d);
    cache_req_t r;
    r.en = en; r.we = we; r.bank = ga[12]; r.addr = ga[11:0]; r.wdata = d;
    return r;
  endfunction

  task automatic idle();
    for (int p = 0; p < 4; p++) req[p] = '0;
  endtask

  task automatic check(input int p, input int ga);
    checks++;
    if (rdata[p] !== ref_mem[ga]) begin
      failures++; $display("FAIL lgn=%0d port %0d addr %0d: %0d exp %0d", logn, p, ga, rdata[p], ref_mem[ga]);
    end
  endtask

  task automatic run(input int lg);
    int n, polys, pl, pr, ga [4];
    n = 1 << lg; polys = 4096 / n;
    logn = 4'(lg);
    for (int a = 0; a < 8192; a++) begin
      @(negedge clk);
      idle();
      ref_mem[a] = 24'($urandom);
      req[0] = mk(1, 1, a, ref_mem[a]);
    end
    repeat (600) begin
      @(negedge clk);
      pl = $urandom_range(0, polys - 1);
      pr = $urandom_range(0, polys - 1);
      begin
        int j;
        j = $urandom_range(0, n / 2 - 1);
        ga[0] = pl * n + 2 * j;     ga[1] = ga[0] + 1;
        ga[2] = 4096 + pr * n + j;  ga[3] = ga[2] + n / 2;
      end
      for (int p = 0; p < 4; p++) req[p] = mk(1, 0, ga[p], '0);
      @(negedge clk);
      idle();
      for (int p = 0; p < 4; p++) check(p, ga[p]);
    end
    // butterfly-style write while reading the other bank
    repeat (300) begin
      int j, w0, w1;
      logic [23:0] d0, d1;
      @(negedge clk);
      j = $urandom_range(0, n / 2 - 1);
      pl = $urandom_range(0, polys - 1);
      pr = $urandom_range(0, polys - 1);
      ga[0] = 4096 + pr * n + 2 * j; ga[1] = ga[0] + 1;
      w0 = pl * n + j; w1 = w0 + n / 2;
      d0 = 24'($urandom); d1 = 24'($urandom);
      req[0] = mk(1, 0, ga[0], '0); req[1] = mk(1, 0, ga[1], '0);
      req[2] = mk(1, 1, w0, d0);    req[3] = mk(1, 1, w1, d1);
      ref_mem[w0] = d0; ref_mem[w1] = d1;
      @(negedge clk);
      idle();
      check(0, ga[0]); check(1, ga[1]);
      req[0] = mk(1, 0, w0, '0); req[1] = mk(1, 0, w1, '0);
      @(negedge clk);
      idle();
      check(0, w0); check(1, w1);
    end
  endtask

  initial begin
    idle();
    run(8);
    run(9);
    run(10);
    run(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
