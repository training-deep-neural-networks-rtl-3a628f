// tb_gemm_engine -- self-checking test of the chunked GEMM engine.
//
// Runs a small GEMM, C = A x B with A of 6 x N and B of N x 8, by
// streaming each row of A as the shared operand against the 8 columns of B
// (one per lane), for N = 64, 100 and 257 in FP8 mode and N = 90 in FP16
// mode. Each of the 8 results per row is checked in FP16 and in FP8 against
// a real-arithmetic model of the chunk-based dot product (chunk 64, every
// FP16 addition rounded to nearest-even), and the result must appear
// exactly two cycles after the last element (one element per cycle, no
// stalls, back-to-back rows).
module tb_gemm_engine;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  localparam int LANES = 8, CL = 64;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_last = 0, fp16_mode = 0;
  fp16_t x = '0;
  fp16_t y [LANES];
  logic  out_valid;
  fp16_t out_fp16 [LANES];
  fp8_t  out_fp8  [LANES];

  int checks = 0, failures = 0, cyc = 0, rows_done = 0;
  typedef struct { int cyc; logic [15:0] r [LANES]; } exp_t;
  exp_t expq [$];

  gemm_engine #(.LANES(LANES), .CL(CL)) dut (.*);

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
    exp_t e;
    rows_done++;
    if (expq.size() == 0) check(0, "unexpected result");
    else begin
      e = expq.pop_front();
      check(e.cyc == cyc, "latency");
      for (int l = 0; l < LANES; l++) begin
        check(same16(out_fp16[l], e.r[l]), "fp16 result");
        check(same8(out_fp8[l], rne8(v16(e.r[l]))), "fp8 result");
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

  task automatic run_gemm(int rows, int n, bit f16);
    logic [15:0] b [][LANES];
    b = new[n];
    for (int k = 0; k < n; k++)
      for (int l = 0; l < LANES; l++)
        b[k][l] = f16 ? rand16(25, 35) : 16'(rand8(8, 20));
    for (int r = 0; r < rows; r++) begin
      real acc [LANES], ch [LANES];
      exp_t e;
      foreach (acc[l]) begin acc[l] = 0.0; ch[l] = 0.0; end
      for (int k = 0; k < n; k++) begin
        x = f16 ? rand16(25, 35) : 16'(rand8(8, 20));
        for (int l = 0; l < LANES; l++) begin
          real p;
          y[l] = b[k][l];
          p = f16 ? v16(rne16(v16(x) * v16(y[l]))) : v16(rne16(v8(x[7:0]) * v8(y[l][7:0])));
          ch[l] = v16(rne16(ch[l] + p));
          if ((k + 1) % CL == 0 || k == n - 1) begin
            acc[l] = v16(rne16(acc[l] + ch[l]));
            ch[l] = 0.0;
          end
        end
        fp16_mode = f16;
        in_valid = 1;
        in_last = (k == n - 1);
        @(negedge clk);
      end
      for (int l = 0; l < LANES; l++) e.r[l] = rne16(acc[l]);
      e.cyc = cyc + 1;   // two clock edges after the edge that took the last element
      expq.push_back(e);
    end
    in_valid = 0; in_last = 0;
  endtask

  initial begin
    foreach (y[l]) y[l] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_gemm(6, 64, 0);
    run_gemm(6, 100, 0);
    run_gemm(6, 257, 0);
    run_gemm(6, 90, 1);
    repeat (5) @(negedge clk);
    check(rows_done == 24 && expq.size() == 0, "all rows");
    $display("rows computed: %0d", rows_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
