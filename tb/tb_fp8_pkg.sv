// tb_fp8_pkg -- self-checking test of the shared format package.
//
// Checks the format constants (FP8 = 1/5/2 with bias 15, FP16 = 1/6/9 with
// bias 31, chunk length 64) and converts all 256 FP8 codes to FP16 with
// fp8_to_fp16, requiring each result to have exactly the real value of the
// FP8 input (zero codes to a zero of the same sign).
module tb_fp8_pkg;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t w;
    check(FP8_E == 5 && FP8_M == 2 && FP16_E == 6 && FP16_M == 9, "field widths");
    check(FP8_BIAS == 15 && FP16_BIAS == 31, "biases");
    check(CHUNK_LEN == 64, "chunk length");
    check($bits(fp8_t) == 8 && $bits(fp16_t) == 16, "type widths");
    for (int i = 0; i < 256; i++) begin
      w = fp8_to_fp16(8'(i));
      #1;
      check(v16(w) == v8(8'(i)), $sformatf("widen %02h -> %04h", i, w));
      check(w[15] == i[7], "sign kept");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
