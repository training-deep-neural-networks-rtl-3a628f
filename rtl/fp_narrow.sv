// fp_narrow -- FP16 (1,6,9) to FP8 (1,5,2) rounding.
//
// GEMM sums are accumulated in FP16 and then rounded down to FP8 before
// they are stored as the next layer's activations, errors or weight
// gradients; the weight-update unit also uses it to derive the FP8 copy of
// the FP16 master weight. The exponent is re-biased (31 -> 15) and the
// 10-bit significand is rounded to 2 mantissa bits by fp_round, by
// nearest-even or stochastically with 7 random bits. Values beyond the FP8
// range saturate, values below it flush to zero; the sign bit passes
// straight through. Purely combinational.
module fp_narrow (
  input  fp8_pkg::fp16_t     a,
  input  fp8_pkg::rnd_mode_e mode,
  input  logic [6:0]         rnd,
  output fp8_pkg::fp8_t      y
);
  import fp8_pkg::*;

  localparam int EW = FP16_E + 4;

  logic [FP16_E-1:0]    e16;
  logic signed [EW-1:0] exp8;

  always_comb begin
    e16  = a[FP16_E+FP16_M-1:FP16_M];
    exp8 = EW'(int'(e16)) - EW'(FP16_BIAS) + EW'(FP8_BIAS);
  end

  fp_round #(.E(FP8_E), .M(FP8_M), .W(FP16_M + 1), .EW(EW)) u_round (
    .sign   (a[15]),
    .exp_in (exp8),
    .sig    ({1'b1, a[FP16_M-1:0]}),
    .is_zero(e16 == '0),
    .mode   (mode),
    .rnd    (rnd),
    .result (y)
  );

endmodule
