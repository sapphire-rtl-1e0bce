// tb_sram_sp: self-checking test of the single-port SRAM model, in the four
// sizes the core uses: a 1024 x 24 polynomial-cache macro, the 5120 x 24 NTT
// constants RAM, the 256 x 32 instruction memory and the 64 x 32 CDT table.
//
// Each memory is filled with random words (one write per cycle), then read back
// in random order; a read returns its word on the clock edge after the request
// (one-cycle latency) and rdata holds while en is low or during a write.
module tb_sram_sp;
  logic clk = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one memory under test with its own stimulus
  logic        en [4], we [4];
  logic [12:0] addr [4];
  logic [31:0] wdata [4];
  logic [23:0] rd0, rd1;
  logic [31:0] rd2, rd3;

  sram_sp #(.DEPTH(1024), .WIDTH(24)) u_cache_macro (.clk(clk), .en(en[0]), .we(we[0]),
    .addr(addr[0][9:0]), .wdata(wdata[0][23:0]), .rdata(rd0));
  sram_sp #(.DEPTH(5120), .WIDTH(24)) u_const (.clk(clk), .en(en[1]), .we(we[1]),
    .addr(addr[1]), .wdata(wdata[1][23:0]), .rdata(rd1));
  sram_sp #(.DEPTH(256), .WIDTH(32)) u_imem (.clk(clk), .en(en[2]), .we(we[2]),
    .addr(addr[2][7:0]), .wdata(wdata[2]), .rdata(rd2));
  sram_sp #(.DEPTH(64), .WIDTH(32)) u_cdt (.clk(clk), .en(en[3]), .we(we[3]),
    .addr(addr[3][5:0]), .wdata(wdata[3]), .rdata(rd3));

  function automatic logic [31:0] rdata(input int u);
    unique case (u)
      0: return 32'(rd0);
      1: return 32'(rd1);
      2: return rd2;
      default: return rd3;
    endcase
  endfunction

  task automatic test(input int u, input int depth, input int width);
    logic [31:0] ref_mem [];
    logic [31:0] mask, held;
    int a;
    ref_mem = new[depth];
    mask = (width == 32) ? 32'hFFFF_FFFF : ((32'd1 << width) - 1);
    for (int i = 0; i < depth; i++) begin
      @(negedge clk);
      ref_mem[i] = $urandom & mask;
      en[u] = 1; we[u] = 1; addr[u] = 13'(i); wdata[u] = ref_mem[i];
    end
    for (int i = 0; i < 3 * depth; i++) begin
      @(negedge clk);
      a = (i < depth) ? i : int'($urandom_range(0, depth - 1));
      en[u] = 1; we[u] = 0; addr[u] = 13'(a);
      @(negedge clk);
      en[u] = 0;
      checks++;
      if (rdata(u) !== ref_mem[a]) begin
        failures++; $display("FAIL mem %0d addr %0d: %h exp %h", u, a, rdata(u), ref_mem[a]);
      end
      // output holds while idle and during a write (to another address)
      held = rdata(u);
      if (i % 7 == 0) begin
        int a2;
        a2 = (a + 1) % depth;
        ref_mem[a2] = $urandom & mask;
        en[u] = 1; we[u] = 1; addr[u] = 13'(a2); wdata[u] = ref_mem[a2];
      end
      @(negedge clk);
      en[u] = 0;
      checks++;
      if (rdata(u) !== held) begin failures++; $display("FAIL mem %0d output not held", u); end
    end
  endtask

  initial begin
    for (int u = 0; u < 4; u++) begin en[u] = 0; we[u] = 0; addr[u] = '0; wdata[u] = '0; end
    test(0, 1024, 24);
    test(1, 5120, 24);
    test(2, 256, 32);
    test(3, 64, 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
