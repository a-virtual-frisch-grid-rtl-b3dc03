// tb_dc_estimator -- self-checking test of the baseline estimator.
//
// A baseline of 500 counts with +-4 counts of uniform noise is fed in; after
// acquisition the estimate must sit within 2 counts of 500 and the variance
// estimate in the range expected for that noise (about 6.7). Large pulses
// must raise `hold` and must not move the baseline; a step of the baseline
// must be followed. With `enable` low the offset output must be 0.
module tb_dc_estimator;
  import czt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic enable = 1'b1;
  logic in_valid = 1'b0;
  logic signed [15:0] in_data = '0;
  logic [3:0] k = 4'd4, thr_shift = 4'd4;
  logic [7:0] holdoff = 8'd8;
  logic signed [15:0] dc;
  logic [33:0] variance;
  logic hold;
  int checks = 0, failures = 0;
  int holds_seen = 0;

  dc_estimator dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sample(input int v);
    @(negedge clk);
    in_valid = 1'b1; in_data = 16'(v);
    @(negedge clk);
    in_valid = 1'b0;
    if (hold) holds_seen++;
  endtask

  task automatic check_dc(input int exp, input int tol, input string what);
    checks++;
    if (int'(dc) < exp - tol || int'(dc) > exp + tol) begin
      failures++;
      $display("FAIL %s: dc=%0d expected %0d +- %0d", what, dc, exp, tol);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) sample(500 + $urandom_range(0, 8) - 4);
    check_dc(500, 2, "acquired baseline");
    checks++;
    if (variance < 2 || variance > 16) begin failures++; $display("FAIL variance %0d", variance); end
    // pulses: 20 samples of +3000, then baseline again
    for (int p = 0; p < 5; p++) begin
      for (int i = 0; i < 20; i++) sample(3500);
      checks++;
      if (!hold) begin failures++; $display("FAIL hold low during pulse"); end
      check_dc(500, 2, "baseline during pulse");
      for (int i = 0; i < 60; i++) sample(500 + $urandom_range(0, 8) - 4);
      check_dc(500, 2, "baseline after pulse");
    end
    // negative pulses are rejected as well
    for (int i = 0; i < 10; i++) sample(-2000);
    check_dc(500, 2, "baseline during negative pulse");
    for (int i = 0; i < 40; i++) sample(500 + $urandom_range(0, 8) - 4);
    // switch off: no offset is removed
    enable = 1'b0;
    @(negedge clk);
    checks++;
    if (dc !== 16'sd0) begin failures++; $display("FAIL dc not zero when off: %0d", dc); end
    // baseline moves while off, switch on again: it reacquires
    for (int i = 0; i < 50; i++) sample(-300 + $urandom_range(0, 8) - 4);
    enable = 1'b1;
    for (int i = 0; i < 400; i++) sample(-300 + $urandom_range(0, 8) - 4);
    check_dc(-300, 2, "reacquired after switch-on");
    checks++;
    if (holds_seen == 0) begin failures++; $display("FAIL hold never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
