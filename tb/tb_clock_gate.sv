// tb_clock_gate: self-checking test of the latch-based clock gate.
//
// Counts rising edges of the gated clock against a counter on the free clock
// while the enable is toggled at random, changing it at random points of both
// clock phases. The gated clock must pulse exactly in the cycles whose enable
// was stable before the rising edge of clk, must never rise while clk is low
// (no glitch) and must never show a pulse shorter than clk's high phase.
module tb_clock_gate;
  logic clk = 0, en = 0, gclk;
  int checks = 0, failures = 0;
  int exp_edges = 0, got_edges = 0;
  realtime t_rise;
  bit seen_rise = 0;  // the latch starts at an arbitrary value: check pulses after the first rise

  clock_gate dut (.clk(clk), .en(en), .gclk(gclk));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge gclk) begin
    got_edges++;
    t_rise = $realtime;
    seen_rise = 1;
    checks++;
    if (!clk) begin failures++; $display("FAIL gclk rose while clk low at %t", $realtime); end
  end

  always @(negedge gclk) if (seen_rise) begin
    checks++;
    if ($realtime - t_rise < 5.0) begin failures++; $display("FAIL short gclk pulse at %t", $realtime); end
  end

  // enable sampled by the free clock: the reference count
  always @(posedge clk) if (en) exp_edges++;

  initial begin
    for (int i = 0; i < 2000; i++) begin
      // change the enable in the low phase (takes effect at the next edge)
      @(negedge clk);
      #(1 + $urandom_range(0, 3));
      en = 1'($urandom);
      // sometimes try to disturb it during the high phase
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin
        #(1 + $urandom_range(0, 3));
        en = ~en;
        #1 en = ~en;
      end
    end
    @(negedge clk);
    checks++;
    if (got_edges != exp_edges) begin
      failures++; $display("FAIL gated edges %0d expected %0d", got_edges, exp_edges);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
