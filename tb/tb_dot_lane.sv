// tb_dot_lane -- self-checking test of one dataflow-engine lane.
//
// Streams FP8 (and, in FP16 mode, FP16) vectors of lengths below, at and
// above the chunk length (64), with and without idle cycles between
// elements, and checks every emitted chunk sum against a reference that
// runs the chunk-based dot-product loop in real arithmetic, rounding each
// FP16 addition to nearest-even:
//     sum_ch = 0; for i in chunk: sum_ch = rne16(sum_ch + rne16(x*y))
// It also checks that a chunk closes exactly after 64 products or at the
// last element, that `ch_last` marks the final chunk, and that the chunk
// sum appears exactly one cycle after the element that closed the chunk.
module tb_dot_lane;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  localparam int CL = 64;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_last = 0, fp16_mode = 0;
  fp16_t x = '0, y = '0;
  logic  ch_valid, ch_last;
  fp16_t ch_sum;

  typedef struct { int cyc; logic [15:0] sum; bit last; } exp_t;
  exp_t expq [$];

  int checks = 0, failures = 0, cyc = 0, chunks = 0;

  dot_lane #(.CL(CL)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // monitor
  always @(negedge clk) if (rst_n) begin
    if (ch_valid) begin
      exp_t e;
      chunks++;
      if (expq.size() == 0) check(0, "unexpected chunk");
      else begin
        e = expq.pop_front();
        check(e.cyc == cyc, "chunk timing");
        check(same16(ch_sum, e.sum), "chunk sum");
        check(ch_last == e.last, "chunk last flag");
        if (!same16(ch_sum, e.sum)) $display("  got %h exp %h", ch_sum, e.sum);
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

  task automatic run_vector(int n, bit f16, bit gaps);
    real acc;
    int  cnt;
    acc = 0.0; cnt = 0;
    for (int i = 0; i < n; i++) begin
      real p;
      if (gaps && ($urandom_range(3) == 0)) begin
        in_valid = 0;
        @(negedge clk);
      end
      if (f16) begin
        x = rand16(24, 36); y = rand16(24, 36);
        p = v16(rne16(v16(x) * v16(y)));
      end else begin
        x = 16'(rand8(10, 20)); y = 16'(rand8(10, 20));
        p = v16(rne16(v8(x[7:0]) * v8(y[7:0])));
      end
      fp16_mode = f16;
      in_valid = 1;
      in_last  = (i == n - 1);
      acc = v16(rne16(acc + p));
      cnt++;
      if (cnt == CL || i == n - 1) begin
        exp_t e;
        e.cyc = cyc + 1; e.sum = rne16(acc); e.last = (i == n - 1);
        expq.push_back(e);
        acc = 0.0; cnt = 0;
      end
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_vector(1, 0, 0);
    run_vector(63, 0, 0);
    run_vector(64, 0, 0);
    run_vector(65, 0, 1);
    run_vector(300, 0, 0);
    run_vector(130, 1, 0);
    run_vector(200, 0, 1);
    run_vector(70, 1, 1);
    repeat (4) @(negedge clk);
    check(expq.size() == 0, "all chunks delivered");
    check(chunks == 1 + 1 + 1 + 2 + 5 + 3 + 4 + 2, "chunk count");
    $display("chunks seen: %0d", chunks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
