// tb_chunk_size_workload -- Gradient GEMM error against chunk length.
//
// Runs one pass of a Gradient GEMM on seven 8-lane GEMM engines that differ
// only in chunk length (1, 4, 16, 64, 256, 1024, 16384) and measures, for
// each, the normalised L2 distance between the eight FP16 results and the
// exact dot products: sqrt(sum (r - exact)^2) / sqrt(sum exact^2).
// The operands are synthetic and stand in for one column of a convolution
// layer's weight gradient: the shared stream is a ReLU activation
// (max(0, N(0,1))) and lane l carries an error stream N(mu_l, 1) with a
// small non-zero mean mu_l = 0.05 * (l + 1); both are rounded to FP8. The
// reduction length, 16,384, stands for minibatch x output pixels (128
// samples x 128 pixels).
// Expected behaviour:
//   * Chunk lengths 1 and 16384 both reduce to plain FP16 accumulation
//     (one product per chunk, or one chunk), so their results must be equal.
//   * Short chunks leave many inter-chunk additions, long chunks many
//     intra-chunk additions; the error must be lowest in the middle. The
//     errors at chunk lengths 64 and 256 must be below half the error of
//     plain accumulation.
module tb_chunk_size_workload;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  localparam int LANES = 8;
  localparam int L     = 16384;
  localparam int NC    = 7;
  localparam int CLS [NC] = '{1, 4, 16, 64, 256, 1024, 16384};

  logic  clk = 0, rst_n = 0, in_valid = 0, in_last = 0;
  fp16_t x = '0;
  fp16_t y [LANES];
  fp16_t res [NC][LANES];
  logic  ov [NC];

  int checks = 0, failures = 0;

  for (genvar c = 0; c < NC; c++) begin : g_cl
    fp16_t o16 [LANES];
    fp8_t  o8 [LANES];
    gemm_engine #(.LANES(LANES), .CL(CLS[c])) u_eng (
      .clk, .rst_n, .in_valid, .in_last, .fp16_mode(1'b0), .x, .y,
      .out_valid(ov[c]), .out_fp16(o16), .out_fp8(o8));
    for (genvar l = 0; l < LANES; l++) begin : g_res
      assign res[c][l] = o16[l];
    end
  end

  always #5 clk = ~clk;

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

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;          // (0,1]
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  initial begin
    real exact [LANES], err [NC], norm, d, a;
    bit  same;
    for (int l = 0; l < LANES; l++) exact[l] = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < L; i++) begin
      a = gauss();
      x = 16'(rne8(a > 0.0 ? a : 0.0));
      for (int l = 0; l < LANES; l++) begin
        y[l] = 16'(rne8(gauss() + 0.05 * real'(l + 1)));
        exact[l] += v8(x[7:0]) * v8(y[l][7:0]);
      end
      in_valid = 1;
      in_last = (i == L - 1);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    @(negedge clk);
    for (int c = 0; c < NC; c++) check(ov[c], $sformatf("chunk %0d result valid", CLS[c]));

    norm = 0.0;
    for (int l = 0; l < LANES; l++) norm += exact[l] * exact[l];
    $display("chunk length   normalised L2 distance");
    for (int c = 0; c < NC; c++) begin
      err[c] = 0.0;
      for (int l = 0; l < LANES; l++) begin
        d = v16(res[c][l]) - exact[l];
        err[c] += d * d;
      end
      err[c] = $sqrt(err[c] / norm);
      $display("%12d   %.6f", CLS[c], err[c]);
    end
    same = 1'b1;
    for (int l = 0; l < LANES; l++) same &= (res[0][l] == res[NC-1][l]);
    check(same, "chunk 1 and one whole chunk both equal plain accumulation");
    check(err[3] < 0.5 * err[0], "chunk 64 well below plain accumulation");
    check(err[4] < 0.5 * err[0], "chunk 256 well below plain accumulation");
    check(err[3] < err[1] && err[4] < err[1], "chunks 64 and 256 below chunk 4");
    check(err[3] < err[6] && err[4] < err[6], "chunks 64 and 256 below one whole chunk");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
