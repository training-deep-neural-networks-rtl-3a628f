// tb_fp8_train_core -- end-to-end test of the training core at its default
// size (8 lanes, chunk length 64).
//
// Runs one training step of a fully connected layer with 200 inputs, 8
// outputs and a minibatch of 130 samples, the way the core is meant to be
// used, and checks every result against a real-arithmetic model:
//   1. Forward GEMM (FP8): Y[b][l] = sum_n X[b][n] * W8[n][l]; each row of
//      X is streamed against the 8 weight columns. 200-long dot products:
//      three full chunks and one short final chunk.
//   2. Gradient GEMM (FP8): dW[n][l] = sum_b X[b][n] * E[b][l]; 130-long
//      dot products over the minibatch. The FP8 results are the weight
//      gradients of step 4.
//   2b. Backward GEMM (FP8): dX[b][n] = sum_l E[b][l] * W8[n][l] for 4
//      samples, 8 input neurons per pass; 8-long dot products.
//   3. A last-layer Forward GEMM in FP16 mode (FP16 operands, FP16 result
//      kept), for 4 samples.
//   4. Weight update of all 1600 weights from the FP8 gradients: the first
//      200 with nearest rounding (exact match to the model), the rest with
//      stochastic rounding (within a few FP16 LSBs of W' and v' of the
//      exact update).
// Every GEMM result must come two cycles after its last element and every
// update three cycles after its input. The test counts how often each
// mechanism occurred -- full chunks, short final chunks, FP8 and FP16
// dot products, nearest and stochastic updates, stochastic round-ups that
// nearest rounding would not have made -- and fails if one never did.
module tb_fp8_train_core;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  localparam int LANES = 8, CL = 64, NIN = 200, BATCH = 130, NLAST = 4;

  logic  clk = 0, rst_n = 0;
  logic  gemm_valid = 0, gemm_last = 0, gemm_fp16_mode = 0;
  fp16_t gemm_x = '0;
  fp16_t gemm_y [LANES];
  logic  gemm_out_valid;
  fp16_t gemm_out_fp16 [LANES];
  fp8_t  gemm_out_fp8  [LANES];
  logic  upd_valid = 0;
  fp16_t upd_w = '0, upd_v = '0, upd_wd = '0, upd_lr = '0, upd_mom = '0;
  fp8_t  upd_dw = '0;
  rnd_mode_e upd_mode = RND_NEAREST;
  logic  upd_out_valid;
  fp16_t upd_w_new, upd_v_new;
  fp8_t  upd_w8_new;

  fp8_train_core dut (.*);

  // layer data
  logic [7:0]  X  [BATCH][NIN];
  logic [7:0]  E  [BATCH][LANES];
  logic [15:0] W  [NIN][LANES];     // FP16 master weights
  logic [15:0] V  [NIN][LANES];     // FP16 momentum
  logic [7:0]  W8 [NIN][LANES];
  logic [7:0]  DW [NIN][LANES];     // FP8 weight gradients from the GEMM

  int checks = 0, failures = 0, cyc = 0;
  int n_full_chunks = 0, n_short_chunks = 0, n_dot8 = 0, n_dot16 = 0;
  int n_upd_nr = 0, n_upd_sr = 0, n_sr_up = 0;

  typedef struct { int cyc; logic [15:0] r [LANES]; bit f16; int row; bit grad; } gexp_t;
  typedef struct { int cyc; bit sr; logic [15:0] w, v; logic [7:0] w8; real wx, vx; int n, l; } uexp_t;
  gexp_t gq [$];
  uexp_t uq [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // mechanism monitors on lane 0
  always @(negedge clk) if (rst_n && dut.u_gemm.ch_valid[0]) begin
    if (dut.u_gemm.ch_last[0]) n_short_chunks++;
    else n_full_chunks++;
  end

  // GEMM result checker
  always @(negedge clk) if (rst_n && gemm_out_valid) begin
    gexp_t e;
    if (gq.size() == 0) check(0, "unexpected GEMM result");
    else begin
      e = gq.pop_front();
      check(e.cyc == cyc, "GEMM latency");
      if (e.f16) n_dot16 += LANES; else n_dot8 += LANES;
      for (int l = 0; l < LANES; l++) begin
        check(same16(gemm_out_fp16[l], e.r[l]), "GEMM fp16 result");
        check(same8(gemm_out_fp8[l], rne8(v16(e.r[l]))), "GEMM fp8 result");
        if (e.grad) DW[e.row][l] = gemm_out_fp8[l];
      end
    end
  end

  // update checker
  always @(negedge clk) if (rst_n && upd_out_valid) begin
    uexp_t e;
    if (uq.size() == 0) check(0, "unexpected update");
    else begin
      e = uq.pop_front();
      check(e.cyc == cyc, "update latency");
      if (!e.sr) begin
        n_upd_nr++;
        check(same16(upd_w_new, e.w) && same16(upd_v_new, e.v) && same8(upd_w8_new, e.w8),
              "nearest update");
      end else begin
        real ulp, err;
        n_upd_sr++;
        // each stochastic rounding errs by less than one LSB of its result;
        // the update's own error plus that carried in with v'
        ulp = 2.0 * pow2(int'(e.w[14:9]) - 40) + 3.0 * pow2(int'(e.v[14:9]) - 40);
        err = v16(upd_w_new) - e.wx;
        if (err < 0) err = -err;
        check(err <= ulp, "stochastic update accuracy");
        if (upd_w_new != e.w) n_sr_up++;
      end
      W[e.n][e.l] = upd_w_new; V[e.n][e.l] = upd_v_new; W8[e.n][e.l] = upd_w8_new;
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one dot-product pass: shared operand xs[k], lane operands ys[k][l]
  task automatic dot_pass(logic [15:0] xs [], logic [15:0] ys [][LANES], bit f16, int row, bit grad);
    real acc [LANES], ch [LANES];
    gexp_t e;
    int n;
    n = xs.size();
    foreach (acc[l]) begin acc[l] = 0.0; ch[l] = 0.0; end
    for (int k = 0; k < n; k++) begin
      gemm_x = xs[k];
      for (int l = 0; l < LANES; l++) begin
        real p;
        gemm_y[l] = ys[k][l];
        p = f16 ? v16(rne16(v16(xs[k]) * v16(ys[k][l])))
                : v16(rne16(v8(xs[k][7:0]) * v8(ys[k][l][7:0])));
        ch[l] = v16(rne16(ch[l] + p));
        if ((k + 1) % CL == 0 || k == n - 1) begin
          acc[l] = v16(rne16(acc[l] + ch[l]));
          ch[l] = 0.0;
        end
      end
      gemm_fp16_mode = f16;
      gemm_valid = 1;
      gemm_last = (k == n - 1);
      @(negedge clk);
    end
    gemm_valid = 0; gemm_last = 0;
    for (int l = 0; l < LANES; l++) e.r[l] = rne16(acc[l]);
    e.cyc = cyc + 1; e.f16 = f16; e.row = row; e.grad = grad;
    gq.push_back(e);
  endtask

  initial begin
    logic [15:0] xs [];
    logic [15:0] ys [][LANES];
    foreach (gemm_y[l]) gemm_y[l] = '0;
    for (int b = 0; b < BATCH; b++) begin
      for (int n = 0; n < NIN; n++) X[b][n] = rand8(10, 17);
      for (int l = 0; l < LANES; l++) E[b][l] = rand8(8, 16);
    end
    for (int n = 0; n < NIN; n++)
      for (int l = 0; l < LANES; l++) begin
        W[n][l] = rand16(26, 31);
        V[n][l] = rand16(16, 22);
        W8[n][l] = rne8(v16(W[n][l]));
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. Forward GEMM, FP8
    xs = new[NIN]; ys = new[NIN];
    for (int n = 0; n < NIN; n++) for (int l = 0; l < LANES; l++) ys[n][l] = 16'(W8[n][l]);
    for (int b = 0; b < BATCH; b++) begin
      for (int n = 0; n < NIN; n++) xs[n] = 16'(X[b][n]);
      dot_pass(xs, ys, 0, b, 0);
    end

    // 2. Gradient GEMM, FP8
    xs = new[BATCH]; ys = new[BATCH];
    for (int b = 0; b < BATCH; b++) for (int l = 0; l < LANES; l++) ys[b][l] = 16'(E[b][l]);
    for (int n = 0; n < NIN; n++) begin
      for (int b = 0; b < BATCH; b++) xs[b] = 16'(X[b][n]);
      dot_pass(xs, ys, 0, n, 1);
    end

    // 2b. Backward GEMM, FP8: dX[b][n] = sum_l E[b][l] * W8[n][l], 8 input
    //     neurons per pass (one per lane), 8-long dot products (one short chunk)
    xs = new[LANES]; ys = new[LANES];
    for (int b = 0; b < 4; b++)
      for (int n0 = 0; n0 < NIN; n0 += LANES) begin
        for (int k = 0; k < LANES; k++) begin
          xs[k] = 16'(E[b][k]);
          for (int l = 0; l < LANES; l++) ys[k][l] = 16'(W8[n0 + l][k]);
        end
        dot_pass(xs, ys, 0, b, 0);
      end

    // 3. last-layer Forward GEMM, FP16 operands
    xs = new[NIN]; ys = new[NIN];
    for (int n = 0; n < NIN; n++) for (int l = 0; l < LANES; l++) ys[n][l] = W[n][l];
    for (int b = 0; b < NLAST; b++) begin
      for (int n = 0; n < NIN; n++) xs[n] = fp8_to_fp16(X[b][n]);
      dot_pass(xs, ys, 1, b, 0);
    end
    repeat (4) @(negedge clk);
    check(gq.size() == 0, "all GEMM results");

    // 4. weight update from the FP8 gradients
    upd_wd = rne16(5e-4); upd_lr = rne16(0.01); upd_mom = rne16(0.9);
    for (int i = 0; i < NIN * LANES; i++) begin
      uexp_t e;
      int n, l;
      real g, vn, wn, wd, lr, mom;
      n = i / LANES; l = i % LANES;
      upd_mode = (i < 200) ? RND_NEAREST : RND_STOCH;
      upd_w = W[n][l]; upd_v = V[n][l]; upd_dw = DW[n][l];
      wd = v16(upd_wd); lr = v16(upd_lr); mom = v16(upd_mom);
      e.sr = (upd_mode == RND_STOCH);
      if (!e.sr) begin
        g  = v16(rne16(v8(upd_dw) + v16(rne16(wd * v16(upd_w)))));
        vn = v16(rne16(v16(rne16(mom * v16(upd_v))) + v16(rne16(lr * g))));
        wn = v16(rne16(v16(upd_w) - vn));
      end else begin
        g  = v8(upd_dw) + wd * v16(upd_w);
        vn = mom * v16(upd_v) + lr * g;
        wn = v16(upd_w) - vn;
      end
      e.w = rne16(wn); e.v = rne16(vn); e.w8 = rne8(wn); e.wx = wn; e.vx = vn;
      e.n = n; e.l = l; e.cyc = cyc + 3;
      uq.push_back(e);
      upd_valid = 1;
      @(negedge clk);
    end
    upd_valid = 0;
    repeat (5) @(negedge clk);
    check(uq.size() == 0, "all updates");

    $display("full chunks %0d, short final chunks %0d (lane 0)", n_full_chunks, n_short_chunks);
    $display("FP8 dot products %0d, FP16 dot products %0d", n_dot8, n_dot16);
    $display("nearest updates %0d, stochastic updates %0d, stochastic results off nearest %0d",
             n_upd_nr, n_upd_sr, n_sr_up);
    check(n_full_chunks > 0, "full chunk happened");
    check(n_short_chunks > 0, "short final chunk happened");
    check(n_dot8 == LANES * (BATCH + NIN) + 4 * NIN, "FP8 dot products");
    check(n_dot16 == LANES * NLAST, "FP16 dot products");
    check(n_upd_nr == 200 && n_upd_sr == NIN * LANES - 200, "update counts");
    check(n_sr_up > 0, "stochastic rounding departed from nearest");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
