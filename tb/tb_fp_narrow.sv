// tb_fp_narrow -- self-checking test of FP16 -> FP8 rounding.
//
// Every one of the 65,536 FP16 codes is converted in nearest mode and
// compared with the real value rounded to nearest-even FP8 (with
// saturation above the FP8 range and flushing below it); in stochastic
// mode, with random bits, the result must be one of the two FP8
// neighbours of the input.
module tb_fp_narrow;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  logic [15:0] a;
  rnd_mode_e   mode;
  logic [6:0]  rnd;
  logic [7:0]  y;

  int checks = 0, failures = 0;

  fp_narrow dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h -> %h", what, a, y);
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
    for (int i = 0; i < 65536; i++) begin
      a = 16'(i);
      mode = RND_NEAREST; rnd = 7'($urandom);
      #1 check(same8(y, rne8(v16(a))), "nearest");
      mode = RND_STOCH;
      #1 check(same8(y, 8'(fp_trunc(v16(a), 5, 2))) || same8(y, 8'(fp_up(v16(a), 5, 2))),
               "stoch neighbour");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
