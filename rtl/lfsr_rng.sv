// lfsr_rng -- pseudo-random bit source for the stochastic rounders.
//
// Stochastic rounding needs uniformly distributed random bits; the scheme
// states the rounding probabilities but not how the randomness is made, so
// this generator is this design's own choice. It is a 64-bit Fibonacci
// LFSR with the maximal-length polynomial x^64 + x^63 + x^61 + x^60 + 1
// (period 2^64 - 1). Each clock cycle the register is advanced OUT_W steps
// (unrolled in one combinational loop) and the OUT_W bits shifted out in
// that cycle are presented on `rnd`, so every cycle delivers OUT_W fresh
// bits and no bit is handed to two rounders.
// Interface: `rnd` is valid in every cycle after reset; `step` = 0 holds it.
// Reset (active low, synchronous) loads SEED, which must be non-zero.
module lfsr_rng #(
  parameter int unsigned OUT_W = 78,
  parameter logic [63:0] SEED  = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  output logic [OUT_W-1:0] rnd
);

  logic [63:0]      state, nxt;
  logic [OUT_W-1:0] bits;

  always_comb begin
    nxt  = state;
    bits = '0;
    for (int i = 0; i < OUT_W; i++) begin
      bits[i] = nxt[63];
      nxt     = {nxt[62:0], nxt[63] ^ nxt[62] ^ nxt[60] ^ nxt[59]};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= SEED;
      rnd   <= '0;
    end else if (step) begin
      state <= nxt;
      rnd   <= bits;
    end
  end

  initial assert (SEED != '0) else $error("lfsr_rng: SEED must be non-zero");

endmodule
