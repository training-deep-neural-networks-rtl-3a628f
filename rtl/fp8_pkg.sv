// fp8_pkg -- number formats shared by the FP8 training core.
//
// Two reduced-precision floating point formats are used throughout:
//   FP8  = (sign, exponent, mantissa) = (1, 5, 2) bits: GEMM operands
//          (weights, activations, errors, gradients) and GEMM results.
//   FP16 = (1, 6, 9) bits: GEMM accumulation and all weight-update (AXPY)
//          arithmetic, including the master copy of the weights.
// The field widths are those the training scheme specifies. The encoding
// details are this design's own choice, since only the widths are fixed:
//   * exponent bias 2^(E-1)-1 (15 for FP8, 31 for FP16);
//   * value = (-1)^s * 2^(e-bias) * (1 + m/2^M) for e != 0;
//   * e == 0 encodes zero (any mantissa); there are no subnormals, results
//     below the smallest normal flush to a signed zero;
//   * there is no infinity or NaN; the all-ones exponent is an ordinary
//     number and results beyond the largest value saturate to it.
// FP8 -> FP16 widening is exact (every FP8 number is an FP16 number) and is
// provided here as a function; it is pure wiring plus a bias adjustment.
package fp8_pkg;

  localparam int unsigned FP8_E  = 5;
  localparam int unsigned FP8_M  = 2;
  localparam int unsigned FP16_E = 6;
  localparam int unsigned FP16_M = 9;

  localparam int unsigned FP8_BIAS  = (1 << (FP8_E - 1)) - 1;   // 15
  localparam int unsigned FP16_BIAS = (1 << (FP16_E - 1)) - 1;  // 31

  // Chunk length used for all GEMMs (Forward, Backward, Gradient).
  localparam int unsigned CHUNK_LEN = 64;

  typedef logic [1+FP8_E+FP8_M-1:0]   fp8_t;
  typedef logic [1+FP16_E+FP16_M-1:0] fp16_t;

  typedef enum logic {
    RND_NEAREST = 1'b0,  // round to nearest, ties to even
    RND_STOCH   = 1'b1   // floating point stochastic rounding
  } rnd_mode_e;

  // Exact FP8 -> FP16 conversion.
  function automatic fp16_t fp8_to_fp16(fp8_t a);
    logic [FP8_E-1:0] e8;
    e8 = a[FP8_E+FP8_M-1:FP8_M];
    if (e8 == '0) return {a[7], 15'b0};
    return {a[7],
            FP16_E'(int'(e8) - int'(FP8_BIAS) + int'(FP16_BIAS)),
            a[FP8_M-1:0], (FP16_M - FP8_M)'(0)};
  endfunction

endpackage
