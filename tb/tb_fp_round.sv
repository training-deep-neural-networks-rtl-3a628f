// tb_fp_round -- self-checking test of the rounding/packing stage.
//
// Drives fp_round in its FP16 adder configuration (E=6, M=9, W=26, 16
// discarded bits) with random signs, exponents (including codes that
// overflow and underflow) and significands, and checks:
//   * nearest mode against a real-arithmetic round-to-nearest-even model;
//   * stochastic mode: the result is always one of the two neighbours of
//     the exact value, rnd = 0 gives truncation, and for a fixed discarded
//     fraction f the observed round-up rate over many random draws is f
//     within a few standard deviations (the stochastic rounding rule).
module tb_fp_round;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  localparam int E = 6, M = 9, W = 26, EW = 10, RW = W - 1 - M;

  logic              sign, is_zero;
  logic signed [EW-1:0] exp_in;
  logic [W-1:0]      sig;
  rnd_mode_e         mode;
  logic [RW-1:0]     rnd;
  logic [E+M:0]      result;

  int checks = 0, failures = 0;

  fp_round #(.E(E), .M(M), .W(W), .EW(EW)) dut (.*);

  function automatic real exact_val();
    real v;
    v = real'(sig) / real'(64'd1 << (W - 1)) * pow2(int'(exp_in) - 31);
    return sign ? -v : v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: sign=%0d exp=%0d sig=%h mode=%0d rnd=%h -> %h",
                 what, sign, exp_in, sig, mode, rnd, result);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    is_zero = 0;
    // nearest-even against the model
    for (int i = 0; i < 20000; i++) begin
      sign   = 1'($urandom);
      exp_in = EW'($signed($urandom_range(70)) - 3);
      sig    = {1'b1, (W-1)'($urandom)};
      if (i % 4 == 0) sig[RW-1:0] = {1'b1, (RW-1)'(0)};     // exact ties
      mode = RND_NEAREST; rnd = RW'($urandom);
      #1;
      check(same16(result, rne16(exact_val())), "nearest");
    end
    // stochastic: result is a neighbour of the exact value
    for (int i = 0; i < 20000; i++) begin
      sign   = 1'($urandom);
      exp_in = EW'($signed($urandom_range(70)) - 3);
      sig    = {1'b1, (W-1)'($urandom)};
      mode = RND_STOCH; rnd = RW'($urandom);
      #1;
      check(same16(result, 16'(fp_trunc(exact_val(), E, M))) ||
            same16(result, 16'(fp_up(exact_val(), E, M))), "stoch neighbour");
      rnd = '0;
      #1;
      check(same16(result, 16'(fp_trunc(exact_val(), E, M))), "stoch rnd=0 truncates");
    end
    // stochastic: round-up rate equals the discarded fraction
    for (int k = 0; k < 8; k++) begin
      int ups, n;
      real f, rate, tol;
      ups = 0; n = 4000;
      sign = 0; exp_in = 40;
      sig = {1'b1, 9'h0A5, RW'(0)};
      sig[RW-1:0] = RW'((k * 9001 + 1234) % (1 << RW));
      f = real'(sig[RW-1:0]) / real'(1 << RW);
      mode = RND_STOCH;
      for (int j = 0; j < n; j++) begin
        rnd = RW'($urandom);
        #1;
        if (result != {1'b0, 6'd40, 9'h0A5}) ups++;
      end
      rate = real'(ups) / real'(n);
      tol  = 4.0 * $sqrt(f * (1.0 - f) / real'(n)) + 0.005;
      check(rate > f - tol && rate < f + tol, "stoch rate");
      $display("discarded fraction %f: round-up rate %f", f, rate);
    end
    // forced zero and saturation
    sign = 1; exp_in = 200; sig = '1; mode = RND_NEAREST; is_zero = 1;
    #1 check(result[14:0] == '0, "is_zero");
    is_zero = 0;
    #1 check(result == 16'hFFFF, "saturate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
