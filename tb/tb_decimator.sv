// tb_decimator -- self-checking test of the integrate-and-dump decimator.
//
// Feeds random 14-bit samples with random gaps between strobes, for several
// settings of the window n and the dropped LSBs, including n = 0 (treated
// as 1) and inputs large enough to saturate. A reference sum computed here
// gives the expected output of every window; the test also checks that
// exactly one output appears per n inputs, one clock after the n-th input.
module tb_decimator;
  import czt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [13:0] in_data = '0;
  logic [6:0] n = 7'd4;
  logic [3:0] lsb_drop = 4'd0;
  logic out_valid;
  logic signed [15:0] out_data;
  int checks = 0, failures = 0;

  decimator dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] ref_sat(longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  task automatic run_case(input int nn, input int drop, input int count, input bit big);
    longint acc = 0;
    int k = 0, n_eff, outs = 0;
    n_eff = (nn == 0) ? 1 : nn;
    n = 7'(nn); lsb_drop = 4'(drop);
    for (int i = 0; i < count; i++) begin
      logic signed [13:0] x;
      x = big ? 14'sh1fff : 14'($urandom);
      @(negedge clk);
      in_valid = 1'b1; in_data = x;
      acc += longint'(x); k++;
      @(negedge clk);
      in_valid = 1'b0;
      if (k == n_eff) begin
        checks++;
        if (!out_valid || out_data !== ref_sat(acc >>> drop)) begin
          failures++;
          $display("FAIL n=%0d drop=%0d: valid=%0b got %0d exp %0d", nn, drop, out_valid, out_data, ref_sat(acc >>> drop));
        end
        outs++; acc = 0; k = 0;
      end else begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL unexpected output"); end
      end
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    checks++;
    if (outs != count / n_eff) begin failures++; $display("FAIL rate: %0d outputs for %0d inputs, n=%0d", outs, count, n_eff); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_case(4, 0, 64, 0);
    run_case(5, 1, 100, 0);
    run_case(1, 0, 20, 0);
    run_case(0, 0, 20, 0);
    run_case(16, 3, 96, 0);
    run_case(127, 0, 254, 1);   // saturates
    run_case(127, 4, 127, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
