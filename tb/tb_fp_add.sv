// tb_fp_add -- self-checking test of the FP16 adder.
//
// Random FP16 operand pairs, drawn so that equal exponents, near
// cancellation, large exponent gaps (swamping), zero operands, overflow
// and underflow all occur, are checked against a real-arithmetic model:
//   * nearest mode must equal the exact sum rounded to nearest-even;
//   * stochastic mode must give one of the two FP16 neighbours of the
//     exact sum, and averaged over many random draws must reproduce the
//     exact sum of 1.0 + 2^-14, a small addend that nearest rounding
//     swamps completely.
module tb_fp_add;
  import fp8_pkg::*;
  import fp_ref_pkg::*;

  logic [15:0] a, b, s;
  rnd_mode_e   mode;
  logic [15:0] rnd;

  int checks = 0, failures = 0;

  fp_add #(.E(6), .M(9), .EXT(16)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h + %h -> %h (mode %0d)", what, a, b, s, mode);
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
    real x, mean;
    for (int i = 0; i < 60000; i++) begin
      a = 16'($urandom);
      b = 16'($urandom);
      case (i % 6)
        0: b[14:9] = a[14:9];                                   // equal exponents
        1: b[14:9] = 6'(int'(a[14:9]) - int'($urandom_range(3))); // close
        2: b = {~a[15], a[14:9], 9'(a[8:0] ^ 9'($urandom_range(7)))}; // cancellation
        3: b[15:9] = 7'($urandom_range(1));                      // zero operand
        default: ;
      endcase
      mode = RND_NEAREST; rnd = 16'($urandom);
      #1;
      x = v16(a) + v16(b);
      check(same16(s, rne16(x)), "nearest");
      mode = RND_STOCH;
      #1;
      check(same16(s, 16'(fp_trunc(x, 6, 9))) || same16(s, 16'(fp_up(x, 6, 9))), "stoch neighbour");
    end
    // swamping: 1.0 + 2^-14 (5 bits below the LSB of 1.0)
    a = {1'b0, 6'd31, 9'd0};
    b = {1'b0, 6'd17, 9'd0};
    mode = RND_NEAREST;
    #1 check(s == a, "nearest swamps small addend");
    mode = RND_STOCH;
    mean = 0.0;
    for (int j = 0; j < 20000; j++) begin
      rnd = 16'($urandom);
      #1 mean += v16(s);
    end
    mean = mean / 20000.0;
    $display("stochastic mean of 1 + 2^-14: %.8f (exact %.8f)", mean, 1.0 + pow2(-14));
    check(mean > 1.0 + pow2(-14) * 0.85 && mean < 1.0 + pow2(-14) * 1.15, "stoch mean");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
