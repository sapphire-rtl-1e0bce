// keccak_core: 24-cycle Keccak-f[1600] core with a parallel 1600-bit state.
//
// The whole state is held in registers and one round is applied per clock, so
// a permutation takes 24 cycles (the paper's 24-cycle core). Commands, taken
// only while idle:
//   clear   - set the state to zero,
//   absorb  - XOR the 1600-bit block blk into the state (the caller zeroes the
//             capacity part and adds padding),
//   permute - run the 24 rounds; busy is high meanwhile, done pulses at the end.
// state exposes the register for squeezing.
// Interface: clk, rst, clear, absorb, blk, permute in; state, busy, done out.
module keccak_core #(
  parameter int unsigned ROUNDS = 24
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          clear,
  input  logic          absorb,
  input  logic [1599:0] blk,
  input  logic          permute,
  output logic [1599:0] state,
  output logic          busy,
  output logic          done
);
  logic [4:0]    rnd;
  logic [1599:0] nxt;

  keccak_round u_round (.s_in(state), .round(rnd), .s_out(nxt));

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= '0; rnd <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        state <= nxt;
        if (rnd == 5'(ROUNDS - 1)) begin
          busy <= 1'b0; done <= 1'b1; rnd <= '0;
        end else rnd <= rnd + 5'd1;
      end else if (clear) begin
        state <= '0;
      end else if (absorb) begin
        state <= state ^ blk;
      end else if (permute) begin
        busy <= 1'b1; rnd <= '0;
      end
    end
  end
endmodule
