// tb_keccak_core: self-checking test of the Keccak-f[1600] core (and its
// combinational round function).
//
// Checks against published values: Keccak-f[1600] of the all-zero state (first
// lanes F1258F7940E1DDE7, 84D5CCF933C0478A) and of that result again (first lane
// 2D5C954DF96ECB3C), and the first 16 bytes of SHAKE128("") and SHAKE256(""),
// obtained by absorbing the padded empty message. Also checks the paper's
// 24 cycles per permutation (busy for 24 cycles, done right after) and that
// clear zeroes the state.
module tb_keccak_core;
  logic          clk = 0, rst = 1, clear = 0, absorb = 0, permute = 0;
  logic [1599:0] blk, state;
  logic          busy, done;
  int checks = 0, failures = 0;

  keccak_core dut (.clk(clk), .rst(rst), .clear(clear), .absorb(absorb), .blk(blk),
                   .permute(permute), .state(state), .busy(busy), .done(done));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect64(input string what, input logic [63:0] got, input logic [63:0] e);
    checks++;
    if (got !== e) begin failures++; $display("FAIL %s: %h exp %h", what, got, e); end
  endtask

  function automatic logic [127:0] bytes16(input logic [1599:0] s);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = s[8*i +: 8];
    return r;
  endfunction

  task automatic perm();
    int n = 0;
    @(negedge clk); permute = 1;
    @(negedge clk); permute = 0;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low during permutation"); end
      n++;
      @(negedge clk);
    end
    checks++;
    if (n != 24) begin failures++; $display("FAIL permutation took %0d cycles", n); end
  endtask

  task automatic do_clear();
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
  endtask

  task automatic do_absorb(input logic [1599:0] b);
    @(negedge clk); blk = b; absorb = 1;
    @(negedge clk); absorb = 0;
  endtask

  initial begin
    blk = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    do_absorb({1600{1'b1}});
    do_clear();
    checks++;
    if (state != '0) begin failures++; $display("FAIL clear"); end
    perm();
    expect64("f(0) lane 0", state[63:0], 64'hF1258F7940E1DDE7);
    expect64("f(0) lane 1", state[127:64], 64'h84D5CCF933C0478A);
    perm();
    expect64("f(f(0)) lane 0", state[63:0], 64'h2D5C954DF96ECB3C);
    // SHAKE128(""): pad 0x1F ... 0x80 at the end of the 168-byte rate
    do_clear();
    blk = '0; blk[7:0] = 8'h1F; blk[1343] = 1'b1;
    do_absorb(blk);
    perm();
    checks++;
    if (bytes16(state) !== 128'h7f9c2ba4e88f827d616045507605853e) begin
      failures++; $display("FAIL SHAKE128 empty: %h", bytes16(state));
    end
    // SHAKE256(""): rate 136 bytes
    do_clear();
    blk = '0; blk[7:0] = 8'h1F; blk[1087] = 1'b1;
    do_absorb(blk);
    perm();
    checks++;
    if (bytes16(state) !== 128'h46b9dd2b0ba88d13233b3feb743eeb24) begin
      failures++; $display("FAIL SHAKE256 empty: %h", bytes16(state));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
