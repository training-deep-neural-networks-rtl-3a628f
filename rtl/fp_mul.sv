// fp_mul -- floating point multiplier with configurable formats.
//
// Multiplies two numbers of format (1, IE, IM) and delivers the product in
// format (1, OE, OM). Used as
//   * FP8 x FP8 -> FP16  (IE=5, IM=2, OE=6, OM=9): the multiplier of the
//     GEMM lanes. The 6-bit product of two 3-bit significands always fits
//     the FP16 mantissa and the product exponent fits FP16 except for
//     products of 2^33 or more (both operands near the FP8 maximum), which
//     saturate; every other product is exact and accumulation starts from
//     the exact product.
//   * FP16 x FP16 -> FP16 (all parameters 6/9): the multipliers of the
//     weight-update AXPYs and of the lanes when a layer runs in FP16.
// The significands (hidden one restored) are multiplied exactly, the
// product is normalised (one-bit shift), and fp_round rounds it by the
// selected mode: nearest-even or stochastic with the `rnd` bits. Zero
// operands give a signed zero. Purely combinational.
module fp_mul #(
  parameter int unsigned IE = 5,
  parameter int unsigned IM = 2,
  parameter int unsigned OE = 6,
  parameter int unsigned OM = 9,
  // significand width handed to the rounder: the full product, or more so
  // that at least two bits are always discarded
  localparam int unsigned PW = ((2*IM + 2) > (OM + 3)) ? (2*IM + 2) : (OM + 3),
  localparam int unsigned RW = PW - 1 - OM
) (
  input  logic [IE+IM:0]    a,
  input  logic [IE+IM:0]    b,
  input  fp8_pkg::rnd_mode_e mode,
  input  logic [RW-1:0]     rnd,
  output logic [OE+OM:0]    p
);
  import fp8_pkg::*;

  localparam int IBIAS = (1 << (IE - 1)) - 1;
  localparam int OBIAS = (1 << (OE - 1)) - 1;
  localparam int EW    = ((IE > OE) ? IE : OE) + 4;
  localparam int unsigned PP = 2*IM + 2;

  logic [IE-1:0]        ea, eb;
  logic [PP-1:0]        prod, prod_n;
  logic [PW-1:0]        sig;
  logic signed [EW-1:0] exp_p;
  logic                 zero;

  always_comb begin
    ea    = a[IE+IM-1:IM];
    eb    = b[IE+IM-1:IM];
    zero  = (ea == '0) || (eb == '0);
    prod  = PP'({1'b1, a[IM-1:0]}) * PP'({1'b1, b[IM-1:0]});
    exp_p = EW'(int'(ea)) + EW'(int'(eb)) - EW'(2*IBIAS) + EW'(OBIAS);
    if (prod[PP-1]) begin
      prod_n = prod;
      exp_p  = exp_p + EW'(1);
    end else begin
      prod_n = prod << 1;
    end
    sig = PW'(prod_n) << (PW - PP);
  end

  fp_round #(.E(OE), .M(OM), .W(PW), .EW(EW)) u_round (
    .sign   (a[IE+IM] ^ b[IE+IM]),
    .exp_in (exp_p),
    .sig    (sig),
    .is_zero(zero),
    .mode   (mode),
    .rnd    (rnd),
    .result (p)
  );

endmodule
