// axpy_unit -- FP16 SGD weight-update pipeline with stochastic rounding.
//
// Performs, element by element, the three AXPY operations of an SGD step
// with momentum, all in FP16 (1,6,9):
//   L2-Reg        g  = dW + wd * W        (dW: FP8 weight gradient, widened)
//   Momentum-Acc  v' = mom * v + lr * g
//   Weight-Upd    W' = W - v'
// and rounds the new FP16 master weight W' to the FP8 weight used by the
// GEMMs. Every multiply and add rounds by `mode`: RND_STOCH (the scheme's
// setting: floating point stochastic rounding, which keeps updates far
// smaller than one LSB of W alive on average) or RND_NEAREST (for
// comparison). The FP8 copy is rounded by the same mode.
// Interface: one element (W, v, dW) per cycle with `in_valid`, together
// with the FP16 hyper-parameters `wd`, `lr`, `mom` and the rounding `mode`
// that apply to it; these travel down the pipeline with the element, so
// they may change from one element to the next. `rnd`
// supplies RND_W fresh random bits every cycle (from lfsr_rng); fixed,
// disjoint slices go to the seven rounders.
// Timing: three pipeline stages, one per AXPY; results appear with
// `out_valid` three cycles after the element entered; full throughput.
// Own choices: the pipeline split, the subtraction in the update (the
// learning rate is a positive number and the momentum term is subtracted)
// and the rounding of the FP8 copy.
module axpy_unit #(
  parameter int unsigned EXT   = 16,
  localparam int unsigned MRW  = 10,             // random bits per FP16 multiply
  localparam int unsigned RND_W = 3*MRW + 3*EXT + 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  fp8_pkg::fp16_t     w,
  input  fp8_pkg::fp16_t     v,
  input  fp8_pkg::fp8_t      dw,
  input  fp8_pkg::fp16_t     wd,
  input  fp8_pkg::fp16_t     lr,
  input  fp8_pkg::fp16_t     mom,
  input  fp8_pkg::rnd_mode_e mode,
  input  logic [RND_W-1:0]   rnd,
  output logic               out_valid,
  output fp8_pkg::fp16_t     w_new,
  output fp8_pkg::fp16_t     v_new,
  output fp8_pkg::fp8_t      w8_new
);
  import fp8_pkg::*;

  // random bit slices
  localparam int unsigned R0 = 0;            // wd*W
  localparam int unsigned R1 = R0 + MRW;     // dW + wd*W
  localparam int unsigned R2 = R1 + EXT;     // mom*v
  localparam int unsigned R3 = R2 + MRW;     // lr*g
  localparam int unsigned R4 = R3 + MRW;     // mom*v + lr*g
  localparam int unsigned R5 = R4 + EXT;     // W - v'
  localparam int unsigned R6 = R5 + EXT;     // FP16 -> FP8

  // ---- stage 1: L2 regularisation --------------------------------------
  fp16_t wdw, g;
  fp_mul #(.IE(FP16_E), .IM(FP16_M), .OE(FP16_E), .OM(FP16_M)) u_mul_wd (
    .a(wd), .b(w), .mode, .rnd(rnd[R0 +: MRW]), .p(wdw));
  fp_add #(.E(FP16_E), .M(FP16_M), .EXT(EXT)) u_add_reg (
    .a(fp8_to_fp16(dw)), .b(wdw), .mode, .rnd(rnd[R1 +: EXT]), .s(g));

  logic      s1_valid;
  fp16_t     s1_w, s1_v, s1_g, s1_lr, s1_mom;
  rnd_mode_e s1_mode;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_w <= '0; s1_v <= '0; s1_g <= '0; s1_lr <= '0; s1_mom <= '0;
      s1_mode <= RND_NEAREST;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_w <= w; s1_v <= v; s1_g <= g; s1_lr <= lr; s1_mom <= mom;
        s1_mode <= mode;
      end
    end
  end

  // ---- stage 2: momentum accumulation -------------------------------------
  fp16_t mv, lg, vn;
  fp_mul #(.IE(FP16_E), .IM(FP16_M), .OE(FP16_E), .OM(FP16_M)) u_mul_mom (
    .a(s1_mom), .b(s1_v), .mode(s1_mode), .rnd(rnd[R2 +: MRW]), .p(mv));
  fp_mul #(.IE(FP16_E), .IM(FP16_M), .OE(FP16_E), .OM(FP16_M)) u_mul_lr (
    .a(s1_lr), .b(s1_g), .mode(s1_mode), .rnd(rnd[R3 +: MRW]), .p(lg));
  fp_add #(.E(FP16_E), .M(FP16_M), .EXT(EXT)) u_add_mom (
    .a(mv), .b(lg), .mode(s1_mode), .rnd(rnd[R4 +: EXT]), .s(vn));

  logic      s2_valid;
  fp16_t     s2_w, s2_v;
  rnd_mode_e s2_mode;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_w <= '0; s2_v <= '0;
      s2_mode <= RND_NEAREST;
    end else begin
      s2_valid <= s1_valid;
      if (s1_valid) begin
        s2_w <= s1_w; s2_v <= vn; s2_mode <= s1_mode;
      end
    end
  end

  // ---- stage 3: weight update and FP8 copy -----------------------------
  fp16_t wn;
  fp8_t  wn8;
  fp_add #(.E(FP16_E), .M(FP16_M), .EXT(EXT)) u_add_upd (
    .a(s2_w), .b({~s2_v[15], s2_v[14:0]}), .mode(s2_mode), .rnd(rnd[R5 +: EXT]), .s(wn));
  fp_narrow u_narrow (
    .a(wn), .mode(s2_mode), .rnd(rnd[R6 +: 7]), .y(wn8));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      w_new <= '0; v_new <= '0; w8_new <= '0;
    end else begin
      out_valid <= s2_valid;
      if (s2_valid) begin
        w_new <= wn; v_new <= s2_v; w8_new <= wn8;
      end
    end
  end

endmodule
