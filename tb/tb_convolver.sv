// tb_convolver -- self-checking test of the 32-tap window convolution.
//
// First runs with the reset window (all coefficients 1: a 32-sample running
// sum of x - dc), then writes a random signed window tap by tap and runs
// again, including back-to-back input strobes. The expected result of every
// sample is computed here from a separate history of x - dc. The test also
// checks that each result appears exactly two clocks after its input.
module tb_convolver;
  import czt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [15:0] in_data = '0, dc = '0;
  logic coef_we = 1'b0;
  logic [4:0] coef_addr = '0;
  logic signed [7:0] coef_data = '0;
  logic out_valid;
  logic signed [31:0] out_data;
  int checks = 0, failures = 0;

  longint hist [32];
  int     c [32];

  convolver dut (.*);

  always #5 clk = ~clk;

  initial begin
    #3000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expected();
    longint s = 0;
    for (int i = 0; i < 32; i++) s += hist[i] * c[i];
    return s;
  endfunction

  task automatic push(input int x, input int d, input bit gap);
    @(negedge clk);
    in_valid = 1'b1; in_data = 16'(x); dc = 16'(d);
    for (int i = 31; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = longint'(x) - longint'(d);
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (out_valid) begin failures++; $display("FAIL result one clock early"); end
    @(negedge clk);
    checks++;
    if (!out_valid || longint'(out_data) != expected()) begin
      failures++;
      $display("FAIL valid=%0b got %0d expected %0d", out_valid, out_data, expected());
    end
    if (gap) repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 32; i++) begin hist[i] = 0; c[i] = 1; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rectangular window on a step: output ramps then stays flat
    for (int i = 0; i < 40; i++) push((i >= 5) ? 1200 : 200, 200, 1'b1);
    checks++;
    if (out_data != 32'sd32000) begin failures++; $display("FAIL flat top %0d", out_data); end
    // random window
    for (int t = 0; t < 32; t++) begin
      @(negedge clk);
      c[t] = $urandom_range(0, 255) - 128;
      coef_we = 1'b1; coef_addr = 5'(t); coef_data = 8'(c[t]);
      @(negedge clk);
      coef_we = 1'b0;
    end
    for (int i = 0; i < 200; i++) push(int'($urandom_range(0, 65535)) - 32768, int'($urandom_range(0, 2000)) - 1000, 1'b1);
    // back-to-back inputs
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      in_valid = 1'b1; in_data = 16'($urandom); dc = 16'sd0;
      for (int j = 31; j > 0; j--) hist[j] = hist[j-1];
      hist[0] = longint'(in_data);
    end
    @(negedge clk);
    in_valid = 1'b0;
    @(negedge clk);
    checks++;
    if (longint'(out_data) != expected()) begin failures++; $display("FAIL back-to-back %0d vs %0d", out_data, expected()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
