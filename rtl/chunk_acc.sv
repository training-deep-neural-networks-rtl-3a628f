// chunk_acc -- inter-chunk accumulation engine.
//
// Implements the outer loop of the chunk-based dot product,
//     sum += sum_ch (FP_acc)
// for the chunk sums produced by a dot_lane. Because each chunk sum already
// carries up to CL products, the running sum here grows CL times more
// slowly than a plain accumulator would, which is what keeps small addends
// from being swamped in the 9-bit FP16 mantissa.
// Interface: `in_valid` with `in_sum` (FP16) delivers one chunk sum;
// `in_last` marks the chunk that ends the dot product. One cycle after that
// last chunk, `out_valid` pulses with the final FP16 sum on `out_fp16` and
// its FP8 rounding (nearest-even) on `out_fp8`, and the running sum
// restarts at zero. A chunk can be accepted every cycle.
// FP16 results are kept for the last layer, whose forward output must stay
// FP16; the FP8 result is what the other layers store.
module chunk_acc #(
  parameter int unsigned EXT = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_last,
  input  fp8_pkg::fp16_t in_sum,
  output logic           out_valid,
  output fp8_pkg::fp16_t out_fp16,
  output fp8_pkg::fp8_t  out_fp8
);
  import fp8_pkg::*;

  fp16_t sum, sum_nxt;
  fp8_t  sum8;

  fp_add #(.E(FP16_E), .M(FP16_M), .EXT(EXT)) u_add (
    .a(sum), .b(in_sum), .mode(RND_NEAREST), .rnd('0), .s(sum_nxt)
  );

  fp_narrow u_narrow (
    .a(sum_nxt), .mode(RND_NEAREST), .rnd('0), .y(sum8)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sum       <= '0;
      out_valid <= 1'b0;
      out_fp16  <= '0;
      out_fp8   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (in_last) begin
          out_valid <= 1'b1;
          out_fp16  <= sum_nxt;
          out_fp8   <= sum8;
          sum       <= '0;
        end else begin
          sum       <= sum_nxt;
        end
      end
    end
  end

endmodule
