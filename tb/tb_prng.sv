// tb_prng: self-checking test of the SHAKE pseudo-random word generator.
//
// Starts the generator on a fixed 256-bit seed with counters c0 = 0x1234 and
// c1 = 0xABCD, in SHAKE-128 and in SHAKE-256 mode, and compares the first 90
// output words with the SHAKE-128/256 output of the 36-byte message
// seed || c0 || c1 (little-endian), taken from an independent software SHAKE.
// 90 words span three output blocks in both modes, so the squeeze
// re-permutation is covered. It also checks the rate (one word per cycle while
// words are left in the block), the stall between blocks (the 24-cycle
// permutation plus one cycle to issue it and one to resume), back-pressure via
// ready and the permutation counter. Then it hashes word messages of 0 to 40
// words in SHA3-256 and SHA3-512 mode, with random gaps between words, and
// compares the digests with an independent software SHA-3.
module tb_prng;
  logic         clk = 0, rst = 1, start = 0, shake256 = 0, stop = 0, ready = 0;
  logic [255:0] seed;
  logic [31:0]  word;
  logic         valid;
  logic [15:0]  perms;
  int checks = 0, failures = 0;
  int cyc = 0;

  logic [31:0] exp128 [90] = '{
    32'h4a5fd641, 32'h7159ba9d, 32'hebc178a0, 32'hd86c81a6, 32'h9941e86b, 32'h48c21b6b,
    32'hf1a895ee, 32'h73887b88, 32'hb5c9d0ee, 32'h5e4619fb, 32'h044b31c2, 32'h44517669,
    32'h2da9b98f, 32'h1149239d, 32'hbe2f5c40, 32'h0b7f9cc6, 32'heab9dfa6, 32'hfa8c7d86,
    32'h5cffeed5, 32'habed9eed, 32'he6787de0, 32'h9773e63f, 32'hf5586508, 32'h48480cde,
    32'h3f1ce962, 32'h63504506, 32'hc98dadbc, 32'h8eb2ad91, 32'h4038d9d8, 32'h5f2ba958,
    32'h55e3c9cb, 32'h09f78729, 32'hbe63fe64, 32'he3e5286c, 32'h1aa97bf7, 32'hbcf9718d,
    32'hf28375e8, 32'h9fd8a74c, 32'hfd366ef6, 32'h9cd75ba3, 32'h9547dab7, 32'hfbf03080,
    32'h415b52aa, 32'hd7f594ea, 32'hb8072e4a, 32'h38afdc91, 32'hf929666d, 32'hd759317e,
    32'h8639f7dd, 32'h7bc2a0ab, 32'h2d03d608, 32'h9356e425, 32'heb910402, 32'hf4cc92e7,
    32'hd2712e00, 32'h61a0efb5, 32'h89925b87, 32'h219b7671, 32'h2bbe5124, 32'h63d7ca41,
    32'hf5a2e702, 32'h3aea4cba, 32'h8a23ce73, 32'h70ed1f47, 32'h2679297d, 32'h8e9358a2,
    32'h39638f6d, 32'hc5f5f539, 32'h7132fb62, 32'hf572bb42, 32'h8ab879d3, 32'he74af917,
    32'hf6993017, 32'hf39c5384, 32'hbde8cd87, 32'h512c9143, 32'h41aca007, 32'h29db5d24,
    32'h67caeff7, 32'h32e17adb, 32'h11b276b1, 32'h20ee41bb, 32'hc4ce0391, 32'h6025e699,
    32'h978e464b, 32'he7145d5c, 32'hee9bcdce, 32'h5afd6ba7, 32'h13935b58, 32'h9578c3c0
  };
  logic [31:0] exp256 [90] = '{
    32'h0cc6804c, 32'h044eb868, 32'ha2a845b8, 32'h71f27cfb, 32'hb5c1b3da, 32'h8a1c5907,
    32'he5051848, 32'h877c07dd, 32'he5022093, 32'h6abe11ef, 32'h7ebcd64e, 32'hed8b550b,
    32'hdea733d4, 32'h4de028c2, 32'h1ff5ebcc, 32'h28d1f7ab, 32'hb1783132, 32'h5049d609,
    32'hc1df6403, 32'h744d8d73, 32'h66048af4, 32'h70d00c05, 32'had4a7917, 32'h01386cc3,
    32'h09940ebe, 32'hdf377daa, 32'h1a68d80c, 32'h2162ad95, 32'hc1ff1c32, 32'ha15396a0,
    32'h069e5d18, 32'h2ada2743, 32'h7432f9fc, 32'h12530690, 32'h17fe4e2e, 32'he8418df6,
    32'hd2fc7f4e, 32'h6016c45c, 32'h029a1e42, 32'h9238c317, 32'hfe239d67, 32'h1b3305f5,
    32'h99d542e6, 32'h045e5844, 32'he4bf6b48, 32'hbd41ba96, 32'h0bc68bc7, 32'hbaeee182,
    32'h92b89abe, 32'h7cef3dda, 32'hc9327ad0, 32'h34a829bd, 32'h452a6f52, 32'hcbdd613b,
    32'h2c7f8926, 32'hc259feeb, 32'hdedbdbab, 32'h7aaa4523, 32'hfcc20f32, 32'h18f02ba2,
    32'h34ed1a26, 32'h37071a88, 32'h9dba80d6, 32'h61f526a4, 32'hc9c997d8, 32'h42b61118,
    32'h9275f420, 32'h2addb158, 32'ha3b03536, 32'h78c4fd79, 32'hcebe2622, 32'h99466ed8,
    32'ha48cb5b4, 32'hb836393a, 32'h2c5a734c, 32'h865f86e8, 32'hc63e83c4, 32'h5802bcef,
    32'h3cc3c127, 32'h009e6c5c, 32'hc3f8b248, 32'h12fb9752, 32'he84a6800, 32'h6e6b60f8,
    32'hc2662647, 32'h8ffdfc6c, 32'hf435916f, 32'h399d7ba9, 32'h86d48972, 32'hbf9da78c
  };

  // SHA3-256 / SHA3-512 digests (as little-endian bit vectors) of the word messages
  // w_i = (i * 32'h01010101) ^ 32'hDEADBEEF, i < len, from an independent software SHA-3
  localparam int NH = 5;
  logic        hc_512 [NH] = '{0, 0, 1, 1, 1};
  int          hc_len [NH] = '{0, 40, 18, 40, 0};
  logic [511:0] hc_dig [NH] = '{
    512'h00000000000000000000000000000000000000000000000000000000000000004a43f8804b0ad882fa493be44dff80f562d661a05647c15166d71ebff8c6ffa7,
    512'h0000000000000000000000000000000000000000000000000000000000000000cb5b15a47f7fd26816b96bb84f901920e80dd48520ef907390c7390b52c094a0,
    512'hede35e532ec3e30ed90631bcefe1c1779933f775dd23cde7c0c8bcadd5c824a3562668d343cfa1824374c11de9068fea953b83b2249a770086f3c0511e53c0f1,
    512'h039f6c45b2567da6362e36e219464e64bfed575d91eae5bbc7d9226d2184c99c1d7fe445a617f6c76e7271f3b5a2ebc69d03e13894c5a55a36f79451556430eb,
    512'h26cd1d2886857501e3d3b6959d1900f558c53a2c40e9e3114cf9f5f13a12b215a6805c47c1dcd1e05958e24f1682c9976e755a18dc67b5c8c59a3aa2cc739fa6
  };
  logic        h_init = 0, h_512 = 0, h_wvalid = 0, h_final = 0;
  logic [31:0] h_word = '0;
  logic        h_wready, h_done;
  logic [511:0] digest;

  prng dut (.clk(clk), .rst(rst), .start(start), .shake256(shake256), .seed(seed),
            .c0(16'h1234), .c1(16'hABCD), .stop(stop), .word(word), .valid(valid),
            .ready(ready), .perms(perms),
            .h_init(h_init), .h_512(h_512), .h_word(h_word), .h_wvalid(h_wvalid),
            .h_wready(h_wready), .h_final(h_final), .h_done(h_done), .digest(digest));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic s256);
    int got = 0, last = 0, rate;
    rate = s256 ? 34 : 42;
    @(negedge clk); shake256 = s256; start = 1;
    @(negedge clk); start = 0; ready = 1;
    while (got < 90) begin
      @(posedge clk);
      if (valid && ready) begin
        logic [31:0] e;
        e = s256 ? exp256[got] : exp128[got];
        checks++;
        if (word !== e) begin
          failures++; $display("FAIL shake%0d word %0d: %h exp %h", s256 ? 256 : 128, got, word, e);
        end
        if (got > 0) begin
          checks++;
          if (got % rate == 0) begin
            if (cyc - last != 27) begin failures++; $display("FAIL block gap %0d cycles", cyc - last); end
          end else if (cyc - last != 1) begin failures++; $display("FAIL word gap %0d cycles", cyc - last); end
        end
        last = cyc;
        got++;
        // back-pressure once in a while
        if (got == 10) begin
          #1 ready = 0; repeat (3) @(posedge clk); #1 ready = 1; last = cyc;
          @(negedge clk);
          last = cyc - 1;
        end
      end
    end
    checks++;
    if (perms != 16'(90 / rate + 1)) begin failures++; $display("FAIL perms=%0d", perms); end
    @(negedge clk); ready = 0; stop = 1;
    @(negedge clk); stop = 0;
    checks++;
    if (valid) begin failures++; $display("FAIL valid after stop"); end
  endtask

  // hash a message with random gaps between words and check the digest and
  // the number of permutations (one per full rate block plus the final one)
  task automatic hash(input int c);
    int sent = 0, rate, nb;
    rate = hc_512[c] ? 18 : 34;
    @(negedge clk); h_512 = hc_512[c]; h_init = 1;
    @(negedge clk); h_init = 0;
    while (sent < hc_len[c]) begin
      h_wvalid = ($urandom_range(0, 3) != 0);
      h_word   = (sent * 32'h01010101) ^ 32'hDEADBEEF;
      @(posedge clk);
      if (h_wvalid && h_wready) sent++;
      @(negedge clk);
    end
    h_wvalid = 0;
    h_final = 1;
    while (!h_done) begin @(posedge clk); #1; end
    @(negedge clk); h_final = 0;
    checks++;
    if (hc_512[c] ? (digest !== hc_dig[c]) : (digest[255:0] !== hc_dig[c][255:0])) begin
      failures++; $display("FAIL sha3-%0d of %0d words: %h", hc_512[c] ? 512 : 256, hc_len[c], digest);
    end
    nb = hc_len[c] / rate + 1;
    checks++;
    if (perms != 16'(nb)) begin failures++; $display("FAIL sha3 permutations %0d, expected %0d", perms, nb); end
  endtask

  initial begin
    for (int i = 0; i < 8; i++) seed[32*i +: 32] = 32'(32'h9E3779B9 * (i + 1));
    repeat (3) @(negedge clk);
    rst = 0;
    run(1'b0);
    run(1'b1);
    for (int c = 0; c < NH; c++) hash(c);
    run(1'b0);  // SHAKE still works after hashing
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
