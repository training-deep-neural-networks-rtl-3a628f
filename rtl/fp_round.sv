// fp_round -- rounding and packing stage shared by every arithmetic unit.
//
// Takes an unpacked floating point result: a sign, a biased exponent held
// in a wide signed field (it may be out of range), and a normalised
// significand of W bits whose top bit is the hidden one. It keeps M
// mantissa bits and discards the RW = W-1-M bits below them, then rounds:
//   RND_NEAREST  round to nearest, ties to even (the discarded MSB is the
//                half bit, the rest act as sticky);
//   RND_STOCH    floating point stochastic rounding: the RW discarded bits
//                are added to RW uniformly random bits `rnd`; a carry out
//                rounds the magnitude up by one unit in the last place.
//                The rounding-up probability is therefore exactly the
//                discarded fraction (m - floor(m)) / eps with eps = 2^-M,
//                which is the stochastic rounding rule of the scheme.
// A mantissa carry from rounding increments the exponent. Exponents above
// the largest code saturate to the largest magnitude, exponents below 1
// flush to a signed zero (the format has no infinities or subnormals; see
// fp8_pkg). `is_zero`, or a significand without its hidden one, gives a
// signed zero. The result sign is the input sign, wired straight through
// (saturation, flushing and rounding never change the sign).
// Purely combinational. Requires RW >= 2.
module fp_round #(
  parameter int unsigned E  = 6,     // exponent bits of the result
  parameter int unsigned M  = 9,     // mantissa bits of the result
  parameter int unsigned W  = 26,    // significand bits in, hidden bit included
  parameter int unsigned EW = E + 4  // width of the signed exponent input
) (
  input  logic                 sign,
  input  logic signed [EW-1:0] exp_in,   // biased exponent of sig
  input  logic        [W-1:0]  sig,      // sig[W-1] is the hidden one
  input  logic                 is_zero,
  input  fp8_pkg::rnd_mode_e   mode,
  input  logic      [W-2-M:0]  rnd,      // random bits, used by RND_STOCH
  output logic      [E+M:0]    result
);
  import fp8_pkg::*;

  localparam int unsigned RW = W - 1 - M;

  logic [M-1:0]   kept;
  logic [RW-1:0]  disc;
  logic [RW:0]    sr_sum;
  logic           up;
  logic [M:0]     mant_r;
  logic signed [EW-1:0] exp_r;

  always_comb begin
    kept   = sig[W-2 -: M];
    disc   = sig[RW-1:0];
    sr_sum = {1'b0, disc} + {1'b0, rnd};
    if (mode == RND_STOCH) up = sr_sum[RW];
    else                   up = disc[RW-1] & ((|disc[RW-2:0]) | kept[0]);

    mant_r = {1'b0, kept} + (M+1)'(up);
    exp_r  = exp_in + EW'(mant_r[M]);

    if (is_zero || !sig[W-1] || exp_r < EW'(1))
      result = {sign, {(E+M){1'b0}}};
    else if (exp_r > EW'((1 << E) - 1))
      result = {sign, {(E+M){1'b1}}};
    else
      result = {sign, exp_r[E-1:0], mant_r[M-1:0]};
  end

endmodule
