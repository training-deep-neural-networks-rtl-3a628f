// tb_weight_update_workload -- many SGD steps with updates far below one LSB.
//
// Two weight-update units, one rounding to nearest and one rounding
// stochastically, run the same 1000 SGD steps (L2 regularisation, momentum,
// weight update) on 16 FP16 weights near 1.0, visited round robin, one
// element per cycle. Every step has the smallest FP8 weight gradient, 2^-14,
// learning rate 0.1, momentum 0.9 and weight decay 2^-16. The momentum term
// then stays below 8e-5, far under half an LSB of a weight near 1.0 (2^-10,
// about 9.8e-4). A real-arithmetic model of the same recursion gives the
// exact trajectory; over 1000 steps it lowers each weight by about 0.07.
// Expected behaviour:
//   * nearest rounding: every weight update is rounded away and all weights
//     end exactly where they started;
//   * stochastic rounding: every weight has moved down, and the mean drop
//     over the 16 weights is within 0.025 of the exact one (about 3 standard
//     deviations of the rounding noise).
// Each result must appear three cycles after its element.
module tb_weight_update_workload;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  localparam int NW    = 16;
  localparam int STEPS = 1000;
  localparam int RW    = 3*10 + 3*16 + 7;

  logic           clk = 0, rst_n = 0, in_valid = 0;
  fp16_t          w_nr = '0, v_nr = '0, w_sr = '0, v_sr = '0;
  fp8_t           dw = '0;
  fp16_t          wd = '0, lr = '0, mom = '0;
  logic [RW-1:0]  rnd;
  logic           ov_nr, ov_sr;
  fp16_t          wn_nr, vn_nr, wn_sr, vn_sr;
  fp8_t           w8_nr, w8_sr;

  int checks = 0, failures = 0, cyc = 0;

  lfsr_rng #(.OUT_W(RW)) u_rng (.clk, .rst_n, .step(1'b1), .rnd);
  axpy_unit u_nr (
    .clk, .rst_n, .in_valid, .w(w_nr), .v(v_nr), .dw, .wd, .lr, .mom,
    .mode(RND_NEAREST), .rnd, .out_valid(ov_nr), .w_new(wn_nr), .v_new(vn_nr),
    .w8_new(w8_nr));
  axpy_unit u_sr (
    .clk, .rst_n, .in_valid, .w(w_sr), .v(v_sr), .dw, .wd, .lr, .mom,
    .mode(RND_STOCH), .rnd, .out_valid(ov_sr), .w_new(wn_sr), .v_new(vn_sr),
    .w8_new(w8_sr));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
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
    fp16_t st_w_nr [NW], st_v_nr [NW], st_w_sr [NW], st_v_sr [NW], w0 [NW];
    real   ex_w [NW], ex_v [NW], g, drop_sr, drop_ex;
    int    tag_q [$], tag_cyc [$], j, t0;
    bit    nr_same, sr_down, timing_ok;

    dw  = rne8(pow2(-14));
    lr  = rne16(0.1);
    mom = rne16(0.9);
    wd  = rne16(pow2(-16));
    for (int k = 0; k < NW; k++) begin
      w0[k] = rne16(1.0 + real'(k) * pow2(-9));
      st_w_nr[k] = w0[k]; st_w_sr[k] = w0[k];
      st_v_nr[k] = '0;    st_v_sr[k] = '0;
      ex_w[k] = v16(w0[k]);
      ex_v[k] = 0.0;
    end
    timing_ok = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int t = 0; t < STEPS * NW + 3; t++) begin
      // collect results of elements that entered three cycles ago
      if (ov_nr || ov_sr) begin
        j  = tag_q.pop_front();
        t0 = tag_cyc.pop_front();
        timing_ok &= ov_nr && ov_sr && (cyc == t0 + 3);
        st_w_nr[j] = wn_nr; st_v_nr[j] = vn_nr;
        st_w_sr[j] = wn_sr; st_v_sr[j] = vn_sr;
      end
      if (t < STEPS * NW) begin
        j = t % NW;
        w_nr = st_w_nr[j]; v_nr = st_v_nr[j];
        w_sr = st_w_sr[j]; v_sr = st_v_sr[j];
        in_valid = 1;
        tag_q.push_back(j);
        tag_cyc.push_back(cyc);
        g = v8(dw) + v16(wd) * ex_w[j];
        ex_v[j] = v16(mom) * ex_v[j] + v16(lr) * g;
        ex_w[j] = ex_w[j] - ex_v[j];
      end else begin
        in_valid = 0;
      end
      @(negedge clk);
    end
    check(tag_q.size() == 0, "every element produced a result");
    check(timing_ok, "results three cycles after their elements");

    nr_same = 1'b1;
    sr_down = 1'b1;
    drop_sr = 0.0;
    drop_ex = 0.0;
    for (int k = 0; k < NW; k++) begin
      nr_same &= (st_w_nr[k] == w0[k]);
      sr_down &= (v16(st_w_sr[k]) < v16(w0[k]));
      drop_sr += (v16(w0[k]) - v16(st_w_sr[k])) / NW;
      drop_ex += (v16(w0[k]) - ex_w[k]) / NW;
    end
    $display("mean weight drop after %0d steps: exact %.5f, stochastic %.5f, nearest %.5f",
             STEPS, drop_ex, drop_sr, v16(w0[0]) - v16(st_w_nr[0]));
    $display("momentum at the end: exact %.3e, stochastic %.3e, nearest %.3e",
             ex_v[0], v16(st_v_sr[0]), v16(st_v_nr[0]));
    check(nr_same, "nearest rounding loses every update");
    check(sr_down, "stochastic rounding moves every weight down");
    check(drop_sr > drop_ex - 0.025 && drop_sr < drop_ex + 0.025,
          "stochastic rounding follows the exact mean drop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
