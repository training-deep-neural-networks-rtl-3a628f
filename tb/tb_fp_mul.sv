// tb_fp_mul -- self-checking test of the floating point multiplier.
//
// Two instances: the GEMM-lane configuration FP8 x FP8 -> FP16 and the
// FP16 x FP16 -> FP16 configuration of the weight update.
//   * FP8: all 65,536 operand pairs; every product must equal the exact
//     real product (it is representable in FP16 unless its magnitude
//     reaches 2^33, where it must saturate), in both modes.
//   * FP16: random operands over the whole exponent range (so overflow
//     saturation and underflow flushing occur) checked against a real
//     round-to-nearest-even model; in stochastic mode the product must be
//     one of the two FP16 neighbours of the exact product.
module tb_fp_mul;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  logic [7:0]  a8, b8;
  logic [15:0] p8, a16, b16, p16;
  rnd_mode_e   mode8, mode16;
  logic [1:0]  rnd8;
  logic [9:0]  rnd16;

  int checks = 0, failures = 0;

  fp_mul #(.IE(5), .IM(2), .OE(6), .OM(9)) dut8 (
    .a(a8), .b(b8), .mode(mode8), .rnd(rnd8), .p(p8));
  fp_mul #(.IE(6), .IM(9), .OE(6), .OM(9)) dut16 (
    .a(a16), .b(b16), .mode(mode16), .rnd(rnd16), .p(p16));

  task automatic check(bit ok, string what, logic [15:0] a, logic [15:0] b, logic [15:0] p);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h * %h -> %h", what, a, b, p);
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
    a16 = '0; b16 = '0; mode16 = RND_NEAREST; rnd16 = '0;
    for (int i = 0; i < 65536; i++) begin
      a8 = 8'(i >> 8); b8 = 8'(i);
      mode8 = rnd_mode_e'(i[0]); rnd8 = 2'($urandom);
      #1;
      check(same16(p8, rne16(v8(a8) * v8(b8))) &&
            (v16(p8) == v8(a8) * v8(b8) || v8(a8) * v8(b8) >= pow2(33) ||
             v8(a8) * v8(b8) <= -pow2(33)), "fp8 exact", 16'(a8), 16'(b8), p8);
    end
    for (int i = 0; i < 40000; i++) begin
      a16 = 16'($urandom); b16 = 16'($urandom);
      if (i % 2) begin a16[14:9] = 6'(20 + $urandom_range(22)); b16[14:9] = 6'(20 + $urandom_range(22)); end
      mode16 = RND_NEAREST; rnd16 = 10'($urandom);
      #1;
      check(same16(p16, rne16(v16(a16) * v16(b16))), "fp16 nearest", a16, b16, p16);
      mode16 = RND_STOCH;
      #1;
      check(same16(p16, 16'(fp_trunc(v16(a16) * v16(b16), 6, 9))) ||
            same16(p16, 16'(fp_up(v16(a16) * v16(b16), 6, 9))), "fp16 stoch", a16, b16, p16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
