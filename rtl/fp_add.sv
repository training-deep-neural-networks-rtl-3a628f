// fp_add -- floating point adder, FP16 (1,6,9) by default.
//
// This is the FP_acc adder of the GEMM lanes and chunk accumulators and the
// adder of the weight-update AXPYs. It works the way the swamping argument
// assumes: the operand of smaller magnitude is shifted right by the exponent
// difference, the aligned significands are added or subtracted, the result
// is normalised and finally rounded to M mantissa bits.
//   * Alignment keeps EXT extra bits below the mantissa (the intermediate
//     mantissa therefore has k' = M + EXT bits); bits shifted out beyond
//     those are ORed into the lowest kept bit (sticky), so round-to-nearest
//     is correctly rounded.
//   * The EXT bits below the mantissa are what fp_round discards; in
//     stochastic mode they are added to EXT random bits.
// A zero operand returns the other operand unchanged. An exact
// cancellation gives +0. Purely combinational.
// EXT is this design's choice (the scheme does not fix k'): 16 bits let a
// stochastic update as small as 2^-16 of an LSB still move the result.
module fp_add #(
  parameter int unsigned E   = 6,
  parameter int unsigned M   = 9,
  parameter int unsigned EXT = 16
) (
  input  logic [E+M:0]       a,
  input  logic [E+M:0]       b,
  input  fp8_pkg::rnd_mode_e mode,
  input  logic [EXT-1:0]     rnd,
  output logic [E+M:0]       s
);
  import fp8_pkg::*;

  localparam int unsigned W  = M + 1 + EXT;   // aligned significand width
  localparam int unsigned EW = E + 4;
  localparam int unsigned LZW = $clog2(W + 1);

  logic           a_big;
  logic [E+M:0]   big, sml;
  logic [E-1:0]   e_big, e_sml;
  logic [W-1:0]   s_big, s_sml, s_sh;
  logic [2*W-1:0] wide;
  logic [E:0]     d;
  logic           sticky, sub, zero;
  logic [W:0]     sum;
  logic [W-1:0]   sig;
  logic [LZW-1:0] lz;
  logic signed [EW-1:0] exp_s;

  always_comb begin
    a_big = a[E+M-1:0] >= b[E+M-1:0];
    big   = a_big ? a : b;
    sml   = a_big ? b : a;
    e_big = big[E+M-1:M];
    e_sml = sml[E+M-1:M];
    s_big = (e_big == '0) ? '0 : {1'b1, big[M-1:0], {EXT{1'b0}}};
    s_sml = (e_sml == '0) ? '0 : {1'b1, sml[M-1:0], {EXT{1'b0}}};
    d     = {1'b0, e_big} - {1'b0, e_sml};
    if (d > (E+1)'(W)) d = (E+1)'(W);

    wide   = {s_sml, {W{1'b0}}} >> d;
    s_sh   = wide[2*W-1:W];
    sticky = |wide[W-1:0];
    s_sh[0] = s_sh[0] | sticky;

    sub = big[E+M] ^ sml[E+M];
    sum = sub ? ({1'b0, s_big} - {1'b0, s_sh}) : ({1'b0, s_big} + {1'b0, s_sh});

    zero  = (sum == '0);
    lz    = '0;
    sig   = '0;
    exp_s = EW'(int'(e_big));
    if (sum[W]) begin
      sig   = sum[W:1];
      sig[0] = sig[0] | sum[0];
      exp_s = exp_s + EW'(1);
    end else begin
      for (int i = 0; i < W; i++)
        if (sum[i]) lz = LZW'(W - 1 - i);
      sig   = sum[W-1:0] << lz;
      exp_s = exp_s - EW'(lz);
    end
  end

  fp_round #(.E(E), .M(M), .W(W), .EW(EW)) u_round (
    .sign   (zero ? (a[E+M] & b[E+M]) : big[E+M]),
    .exp_in (exp_s),
    .sig    (sig),
    .is_zero(zero),
    .mode   (mode),
    .rnd    (rnd),
    .result (s)
  );

endmodule
