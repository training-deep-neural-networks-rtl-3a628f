// tb_lfsr_rng -- self-checking test of the random bit source.
//
// The output stream of a Fibonacci LFSR with characteristic polynomial
// x^64 + x^63 + x^61 + x^60 + 1 obeys the linear recurrence
//     b[n+64] = b[n] ^ b[n+1] ^ b[n+3] ^ b[n+4],
// which the test checks on the concatenated output words (an independent
// description of the sequence rather than a copy of the register). It also
// checks that `step` = 0 holds the output, that reset restarts the same
// sequence, and that ones and zeros are balanced.
module tb_lfsr_rng;
  localparam int OUT_W = 78;
  localparam int NW    = 400;

  logic             clk = 0, rst_n = 0, step = 0;
  logic [OUT_W-1:0] rnd;
  bit               stream [$];
  logic [OUT_W-1:0] first_words [4];

  int checks = 0, failures = 0;

  lfsr_rng #(.OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

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
    int ones;
    logic [OUT_W-1:0] held;
    repeat (2) @(negedge clk);
    rst_n = 1; step = 1;
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      if (w < 4) first_words[w] = rnd;
      for (int i = 0; i < OUT_W; i++) stream.push_back(rnd[i]);
    end
    // recurrence
    for (int n = 0; n + 64 < stream.size(); n++)
      check(stream[n+64] == (stream[n] ^ stream[n+1] ^ stream[n+3] ^ stream[n+4]), "recurrence");
    // balance
    ones = 0;
    foreach (stream[i]) ones += int'(stream[i]);
    check(ones > stream.size() * 45 / 100 && ones < stream.size() * 55 / 100, "balance");
    // hold
    step = 0;
    @(negedge clk) held = rnd;
    repeat (3) @(negedge clk);
    check(rnd == held, "hold");
    // reset restarts the sequence
    rst_n = 0; step = 1;
    @(negedge clk) rst_n = 1;
    for (int w = 0; w < 4; w++) begin
      @(negedge clk);
      check(rnd == first_words[w], "reset repeat");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
