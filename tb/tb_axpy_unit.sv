// tb_axpy_unit -- self-checking test of the FP16 weight-update pipeline.
//
// Nearest mode: 3000 random elements (weights, momenta, FP8 gradients and
// hyper-parameters of typical magnitudes) are checked against a real-
// arithmetic model of the three AXPYs, each operation rounded to
// nearest-even FP16:
//     g = dW + wd*W;  v' = mom*v + lr*g;  W' = W - v';  W8 = rne8(W')
// and every result must appear exactly three cycles after its input.
// Hyper-parameters and the rounding mode change between consecutive
// elements, with no idle cycle.
// Stochastic mode: a weight of 1.0 receives an update of 2^-14, a quarter
// of an LSB below 1.0. Nearest rounding swamps it (W' stays 1.0), while
// stochastic rounding must move W' to 1 - 2^-10 in about 1/16 of the
// elements so that the average update equals the exact one. Random bits
// come from $urandom every cycle.
module tb_axpy_unit;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  localparam int EXT = 16, RND_W = 3*10 + 3*EXT + 7;

  logic       clk = 0, rst_n = 0, in_valid = 0;
  fp16_t      w = '0, v = '0, wd = '0, lr = '0, mom = '0;
  fp8_t       dw = '0;
  rnd_mode_e  mode = RND_NEAREST;
  logic [RND_W-1:0] rnd;
  logic       out_valid;
  fp16_t      w_new, v_new;
  fp8_t       w8_new;

  int checks = 0, failures = 0, cyc = 0, outs = 0;
  typedef struct { int cyc; logic [15:0] w, v; logic [7:0] w8; bit chk; } exp_t;
  exp_t expq [$];
  real  sr_sum = 0.0;
  int   sr_n = 0, sr_moved = 0;

  axpy_unit #(.EXT(EXT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    for (int i = 0; i < RND_W; i += 32) rnd[i +: 32] <= $urandom;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    outs++;
    if (expq.size() == 0) check(0, "unexpected output");
    else begin
      e = expq.pop_front();
      check(e.cyc == cyc, "latency");
      if (e.chk) begin
        check(same16(w_new, e.w), "weight");
        check(same16(v_new, e.v), "momentum");
        check(same8(w8_new, e.w8), "fp8 weight");
        if (!same16(w_new, e.w)) $display("  w got %h exp %h", w_new, e.w);
      end else begin
        sr_sum += v16(w_new);
        sr_n++;
        if (w_new != 16'h3E00) sr_moved++;
      end
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // nearest rounding against the model
    mode = RND_NEAREST;
    for (int i = 0; i < 3000; i++) begin
      exp_t e;
      real g, vn, wn;
      if (i % 100 == 0) begin
        // hyper-parameters change with no idle cycle: they travel with the element
        wd  = rand16(14, 20);   // ~1e-5 .. 1e-3
        lr  = rand16(22, 30);   // ~1e-3 .. 0.5
        mom = rand16(30, 30);   // 0.5 .. 1
      end
      w  = rand16(24, 33);
      v  = rand16(16, 26);
      dw = rand8(3, 16);
      g  = v16(rne16(v8(dw) + v16(rne16(v16(wd) * v16(w)))));
      vn = v16(rne16(v16(rne16(v16(mom) * v16(v))) + v16(rne16(v16(lr) * g))));
      wn = v16(rne16(v16(w) - vn));
      e.w = rne16(wn); e.v = rne16(vn); e.w8 = rne8(wn); e.chk = 1;
      e.cyc = cyc + 3;
      expq.push_back(e);
      in_valid = 1;
      @(negedge clk);
      if (i % 7 == 3) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    // nearest rounding swamps a quarter-LSB update
    w = 16'h3E00; v = '0; wd = '0; mom = '0; lr = 16'h3E00; dw = {1'b0, 5'd1, 2'd0};
    begin
      exp_t e;
      e.w = 16'h3E00; e.v = rne16(pow2(-14)); e.w8 = rne8(1.0); e.chk = 1; e.cyc = cyc + 3;
      expq.push_back(e);
      in_valid = 1;
      @(negedge clk);
    end
    // stochastic rounding preserves it on average (mode changes on the next element)
    mode = RND_STOCH;
    for (int i = 0; i < 4000; i++) begin
      exp_t e;
      e.chk = 0; e.cyc = cyc + 3;
      expq.push_back(e);
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    check(expq.size() == 0 && outs == 3000 + 1 + 4000, "output count");
    $display("stochastic: mean W' = %.8f (exact %.8f), moved %0d of %0d",
             sr_sum / sr_n, 1.0 - pow2(-14), sr_moved, sr_n);
    check(sr_moved > 4000 / 16 * 80 / 100 && sr_moved < 4000 / 16 * 120 / 100, "stochastic update rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
