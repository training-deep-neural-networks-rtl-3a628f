// fp8_train_core -- FP8 training core: chunked GEMM engine plus FP16 weight update.
//
// Ties together the arithmetic of 8-bit floating point training:
//   * gemm_engine: LANES dot-product lanes with FP8 multipliers, FP16
//     intra-chunk accumulation (chunk length CL = 64) and FP16 inter-chunk
//     accumulation engines; results in FP16 and rounded to FP8. It runs the
//     Forward, Backward and Gradient GEMMs; `gemm_fp16_mode` switches to
//     FP16 operands for the layers kept in FP16.
//   * axpy_unit: the FP16 SGD update (L2-Reg, Momentum-Acc, Weight-Upd)
//     with stochastic rounding, producing the FP16 master weight, the FP16
//     momentum and the FP8 weight.
//   * lfsr_rng: the random bits for the stochastic rounders.
// The on-core memories and the engines that move data between them and
// the arithmetic are not part of this RTL: the operand and result streams
// they would drive and take appear here as ports.
// Timing: GEMM results two cycles after `gemm_last`; weight-update results
// three cycles after their inputs; both accept one element per cycle.
// Reset: synchronous, active low.
module fp8_train_core #(
  parameter int unsigned LANES = 8,
  parameter int unsigned CL    = fp8_pkg::CHUNK_LEN,
  parameter int unsigned EXT   = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // GEMM operand streams
  input  logic               gemm_valid,
  input  logic               gemm_last,
  input  logic               gemm_fp16_mode,
  input  fp8_pkg::fp16_t     gemm_x,
  input  fp8_pkg::fp16_t     gemm_y        [LANES],
  // GEMM results
  output logic               gemm_out_valid,
  output fp8_pkg::fp16_t     gemm_out_fp16 [LANES],
  output fp8_pkg::fp8_t      gemm_out_fp8  [LANES],
  // weight update stream
  input  logic               upd_valid,
  input  fp8_pkg::fp16_t     upd_w,
  input  fp8_pkg::fp16_t     upd_v,
  input  fp8_pkg::fp8_t      upd_dw,
  input  fp8_pkg::fp16_t     upd_wd,
  input  fp8_pkg::fp16_t     upd_lr,
  input  fp8_pkg::fp16_t     upd_mom,
  input  fp8_pkg::rnd_mode_e upd_mode,
  output logic               upd_out_valid,
  output fp8_pkg::fp16_t     upd_w_new,
  output fp8_pkg::fp16_t     upd_v_new,
  output fp8_pkg::fp8_t      upd_w8_new
);
  import fp8_pkg::*;

  localparam int unsigned RND_W = 3*10 + 3*EXT + 7;

  logic [RND_W-1:0] rnd;

  lfsr_rng #(.OUT_W(RND_W)) u_rng (
    .clk, .rst_n, .step(1'b1), .rnd
  );

  gemm_engine #(.LANES(LANES), .CL(CL), .EXT(EXT)) u_gemm (
    .clk, .rst_n,
    .in_valid (gemm_valid),
    .in_last  (gemm_last),
    .fp16_mode(gemm_fp16_mode),
    .x        (gemm_x),
    .y        (gemm_y),
    .out_valid(gemm_out_valid),
    .out_fp16 (gemm_out_fp16),
    .out_fp8  (gemm_out_fp8)
  );

  axpy_unit #(.EXT(EXT)) u_axpy (
    .clk, .rst_n,
    .in_valid (upd_valid),
    .w        (upd_w),
    .v        (upd_v),
    .dw       (upd_dw),
    .wd       (upd_wd),
    .lr       (upd_lr),
    .mom      (upd_mom),
    .mode     (upd_mode),
    .rnd      (rnd),
    .out_valid(upd_out_valid),
    .w_new    (upd_w_new),
    .v_new    (upd_v_new),
    .w8_new   (upd_w8_new)
  );

endmodule
