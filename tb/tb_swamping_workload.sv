// tb_swamping_workload -- the swamping experiment on the GEMM hardware.
//
// A vector of 16,336 values is drawn from a uniform distribution with mean 1
// and standard deviation 1 (range 1 -/+ sqrt(3)) and rounded to FP8. Its
// prefixes of length 16, 4096, 8176, 12256 and 16336 are accumulated in
// FP16 in ten ways, and each result is compared with the exact (real) sum of
// the same FP8 values:
//   * nine single-lane GEMM engines, identical except for the chunk length:
//     1 (plain accumulation), 2, 4, 8, 16, 32, 64 (the design's setting),
//     128 and 256. Each prefix is one GEMM pass that multiplies the vector
//     by 1.0;
//   * a plain FP16 accumulator (chunk length 1) built from the FP16 adder in
//     stochastic-rounding mode, fed by the LFSR random number generator.
// Expected behaviour:
//   * Chunk length 1 with nearest rounding: once the running sum reaches
//     4096 = 2^12, an addend of about 1 is below half an LSB of the 9-bit
//     mantissa and is lost. For prefixes of 8176 and more the sum must have
//     stalled below 4700.
//   * Chunk length 2: the chunk sums are about 2 and stall at about twice
//     that sum; at full length the result must be at least 10% short.
//   * Chunk lengths 32 to 256: each chunk sum stays small and the sum of
//     chunk sums must be within 1% of the exact sum for every prefix.
//   * Stochastic rounding, chunk length 1: no stall. The result is correct
//     on average but random; it must be within 10% of the exact sum for
//     every prefix (its standard deviation is about 4% at the longest).
// Each engine must deliver its result two cycles after the last element.
module tb_swamping_workload;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  localparam int N  = 16336;
  localparam int NL = 5;
  localparam int LENS [NL] = '{16, 4096, 8176, 12256, 16336};
  localparam int NC = 9;
  localparam int CLS [NC] = '{1, 2, 4, 8, 16, 32, 64, 128, 256};

  logic  clk = 0, rst_n = 0, in_valid = 0, in_last = 0, sr_en = 0;
  fp16_t x = '0;
  fp16_t y [1];
  logic  ov [NC];
  fp16_t res [NC];

  int checks = 0, failures = 0, cyc = 0, last_cyc = 0;

  for (genvar c = 0; c < NC; c++) begin : g_cl
    fp16_t o16 [1];
    fp8_t  o8 [1];
    gemm_engine #(.LANES(1), .CL(CLS[c])) u_eng (
      .clk, .rst_n, .in_valid, .in_last, .fp16_mode(1'b0), .x, .y,
      .out_valid(ov[c]), .out_fp16(o16), .out_fp8(o8));
    assign res[c] = o16[0];
  end

  // plain FP16 accumulation with stochastic rounding
  logic [15:0] sr_rnd;
  fp16_t       sr_acc, sr_sum;
  lfsr_rng #(.OUT_W(16)) u_rng (.clk, .rst_n, .step(1'b1), .rnd(sr_rnd));
  fp_add u_sr_add (
    .a(sr_acc), .b(fp8_to_fp16(x[7:0])), .mode(RND_STOCH), .rnd(sr_rnd), .s(sr_sum));
  always_ff @(posedge clk) begin
    if (!rst_n)     sr_acc <= '0;
    else if (sr_en) sr_acc <= sr_sum;
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit close_to(real v, real ref_v, real tol);
    return v > ref_v * (1.0 - tol) && v < ref_v * (1.0 + tol);
  endfunction

  initial begin
    fp8_t vals [N];
    real  exact [NL], sr [NL], u, run;
    int   k;
    bit   all_ov;
    y[0] = 16'(rne8(1.0));
    run = 0.0;
    k = 0;
    for (int i = 0; i < N; i++) begin
      u = real'($urandom) / 4294967296.0;                 // [0,1)
      vals[i] = rne8(1.0 + (2.0 * u - 1.0) * $sqrt(3.0));
      run += v8(vals[i]);
      if (k < NL && i + 1 == LENS[k]) begin
        exact[k] = run;
        k++;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // stochastic-rounding accumulator over the whole vector
    k = 0;
    for (int i = 0; i < N; i++) begin
      x = 16'(vals[i]);
      sr_en = 1;
      @(negedge clk);
      if (k < NL && i + 1 == LENS[k]) begin
        sr[k] = v16(sr_acc);
        k++;
      end
    end
    sr_en = 0;

    // one GEMM pass per prefix length
    $write("length      exact");
    for (int c = 0; c < NC; c++) $write("  %7s", $sformatf("CL=%0d", CLS[c]));
    $display("  CL=1 SR");
    for (int l = 0; l < NL; l++) begin
      for (int i = 0; i < LENS[l]; i++) begin
        x = 16'(vals[i]);
        in_valid = 1;
        in_last = (i == LENS[l] - 1);
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      last_cyc = cyc;
      @(negedge clk);
      all_ov = 1'b1;
      for (int c = 0; c < NC; c++) all_ov &= ov[c];
      check(all_ov && cyc == last_cyc + 1, "results two cycles after the last element");
      $write("%6d %10.2f", LENS[l], exact[l]);
      for (int c = 0; c < NC; c++) $write("  %7.1f", v16(res[c]));
      $display("  %7.1f", sr[l]);
      if (LENS[l] >= 8176)
        check(v16(res[0]) >= 4096.0 && v16(res[0]) < 4700.0,
              $sformatf("length %0d: plain FP16 accumulation stalls near 4096", LENS[l]));
      if (LENS[l] == N)
        check(v16(res[1]) < 0.9 * exact[l], "chunk 2 falls short at full length");
      for (int c = 5; c < NC; c++)
        check(close_to(v16(res[c]), exact[l], 0.01),
              $sformatf("length %0d: chunk %0d", LENS[l], CLS[c]));
      check(close_to(sr[l], exact[l], 0.10),
            $sformatf("length %0d: stochastic rounding", LENS[l]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
