// tb_chunk_acc -- self-checking test of the inter-chunk accumulation engine.
//
// Feeds sequences of FP16 chunk sums (1 to 40 chunks, back to back and
// with idle cycles) and checks the final result against real arithmetic
// with every FP16 addition rounded to nearest-even, its FP8 rounding, and
// that `out_valid` comes exactly one cycle after the last chunk.
module tb_chunk_acc;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_last = 0;
  fp16_t in_sum = '0;
  logic  out_valid;
  fp16_t out_fp16;
  fp8_t  out_fp8;

  int checks = 0, failures = 0, cyc = 0, results = 0;
  int          exp_cyc [$];
  logic [15:0] exp_sum [$];

  chunk_acc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    results++;
    if (exp_sum.size() == 0) check(0, "unexpected result");
    else begin
      logic [15:0] e;
      e = exp_sum.pop_front();
      check(exp_cyc.pop_front() == cyc, "result timing");
      check(same16(out_fp16, e), "fp16 result");
      check(same8(out_fp8, rne8(v16(e))), "fp8 result");
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
    for (int v = 0; v < 60; v++) begin
      int n;
      real acc;
      n = 1 + int'($urandom_range(39));
      acc = 0.0;
      for (int i = 0; i < n; i++) begin
        if (v % 3 == 1 && $urandom_range(2) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_sum   = rand16(26, 40);
        in_valid = 1;
        in_last  = (i == n - 1);
        acc = v16(rne16(acc + v16(in_sum)));
        if (in_last) begin
          exp_sum.push_back(rne16(acc));
          exp_cyc.push_back(cyc + 1);
        end
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
    end
    repeat (3) @(negedge clk);
    check(results == 60 && exp_sum.size() == 0, "result count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
