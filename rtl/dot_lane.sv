// dot_lane -- one lane of the reduced-precision dataflow engine.
//
// Implements the inner loop of the chunk-based dot product:
//     for i = 1..CL { tmp = x[idx] * y[idx] (FP_mult); sum_ch += tmp (FP_acc) }
// One operand pair is consumed per cycle when `in_valid` is high. In FP8
// mode the operands are FP8 (in x[7:0], y[7:0]) and their product, which is
// exact in FP16, is added into the FP16 intra-chunk sum register. In FP16
// mode (used for the first layer's input images and the last layer's GEMMs)
// the operands are full FP16 and are multiplied by an FP16 multiplier with
// nearest rounding. Only this single extra register holds the chunk sum.
//
// After CL products, or at the product flagged `in_last` (end of the dot
// product; a final chunk may be shorter than CL), the chunk sum is presented
// for one cycle on `ch_sum` with `ch_valid`, and `ch_last` marks the chunk
// that ends the dot product. The intra-chunk sum then restarts at zero.
// Timing: `ch_valid` rises one cycle after the input that closes the chunk;
// the lane accepts a new operand pair every cycle with no stall.
// GEMM accumulation rounds to nearest (stochastic rounding is reserved for
// the weight update) -- a choice, as the scheme pairs chunking with GEMMs
// and stochastic rounding with AXPYs.
module dot_lane #(
  parameter int unsigned CL  = fp8_pkg::CHUNK_LEN,
  parameter int unsigned EXT = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_last,
  input  logic           fp16_mode,
  input  fp8_pkg::fp16_t x,
  input  fp8_pkg::fp16_t y,
  output logic           ch_valid,
  output logic           ch_last,
  output fp8_pkg::fp16_t ch_sum
);
  import fp8_pkg::*;

  localparam int unsigned CW = (CL > 1) ? $clog2(CL) : 1;

  fp16_t          prod8, prod16, prod, acc, acc_nxt;
  logic [CW-1:0]  cnt;
  logic           close_chunk;

  fp_mul #(.IE(FP8_E), .IM(FP8_M), .OE(FP16_E), .OM(FP16_M)) u_mul8 (
    .a(x[7:0]), .b(y[7:0]), .mode(RND_NEAREST), .rnd('0), .p(prod8)
  );

  fp_mul #(.IE(FP16_E), .IM(FP16_M), .OE(FP16_E), .OM(FP16_M)) u_mul16 (
    .a(x), .b(y), .mode(RND_NEAREST), .rnd('0), .p(prod16)
  );

  assign prod = fp16_mode ? prod16 : prod8;

  fp_add #(.E(FP16_E), .M(FP16_M), .EXT(EXT)) u_add (
    .a(acc), .b(prod), .mode(RND_NEAREST), .rnd('0), .s(acc_nxt)
  );

  assign close_chunk = in_last || (cnt == CW'(CL - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc      <= '0;
      cnt      <= '0;
      ch_valid <= 1'b0;
      ch_last  <= 1'b0;
      ch_sum   <= '0;
    end else begin
      ch_valid <= 1'b0;
      if (in_valid) begin
        if (close_chunk) begin
          ch_valid <= 1'b1;
          ch_last  <= in_last;
          ch_sum   <= acc_nxt;
          acc      <= '0;
          cnt      <= '0;
        end else begin
          acc      <= acc_nxt;
          cnt      <= cnt + CW'(1);
        end
      end
    end
  end

endmodule
