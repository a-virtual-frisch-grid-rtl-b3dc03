// tb_snippet_streamer -- self-checking test of the single-channel stream.
//
// Continuous mode: a ramp is streamed and every word must appear, with a
// sample refused by the output counted as lost. Snippet mode: a waveform
// with pulses crossing the level is fed; each snippet must start with the
// header word {8'h5A, 8'h00, length} and hold the pre samples before the
// crossing, the crossing sample and the post samples after it, compared
// with a model of the recorded waveform.
module tb_snippet_streamer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic enable = 1'b1, snippet_mode = 1'b0;
  logic in_valid = 1'b0;
  logic signed [31:0] in_data = '0, level = 32'sd500;
  logic [7:0] pre = 8'd5;
  logic [11:0] post = 12'd10;
  logic out_valid, out_ready = 1'b1;
  logic [31:0] out_data, lost, snippets;
  int checks = 0, failures = 0;
  logic [31:0] got [$];
  int wave [$];

  snippet_streamer #(.W(32), .DEPTH(64)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_data);

  task automatic put(input int v);
    @(negedge clk);
    in_valid = 1'b1; in_data = v;
    @(negedge clk);
    in_valid = 1'b0;
    repeat (3) @(negedge clk);   // leave time to send a snippet
  endtask

  initial begin
    int idx;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // continuous
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); in_valid = 1'b1; in_data = 1000 + i;
      @(negedge clk); in_valid = 1'b0;
    end
    @(negedge clk);
    checks++;
    if (got.size() != 50) begin failures++; $display("FAIL continuous count %0d", got.size()); end
    foreach (got[i]) begin checks++; if (got[i] != 32'(1000 + i)) begin failures++; $display("FAIL continuous word %0d", i); end end
    // refused samples are counted
    out_ready = 1'b0;
    for (int i = 0; i < 7; i++) begin @(negedge clk); in_valid = 1'b1; @(negedge clk); in_valid = 1'b0; end
    out_ready = 1'b1;
    checks++;
    if (lost != 7) begin failures++; $display("FAIL lost=%0d", lost); end
    got.delete();
    // snippets: three pulses
    snippet_mode = 1'b1;
    for (int p = 0; p < 3; p++) begin
      for (int i = 0; i < 30; i++) begin
        int v;
        v = (i >= 12 && i < 20) ? 900 + 10 * i : 100 + p * 7 + i;
        wave.push_back(v);
        put(v);
        // once all post samples are in, no new samples until the snippet is out
        if (i == 12 + post) repeat (30) @(negedge clk);
      end
    end
    repeat (50) @(negedge clk);
    checks++;
    if (snippets != 3) begin failures++; $display("FAIL snippets=%0d", snippets); end
    idx = 0;
    for (int p = 0; p < 3; p++) begin
      int t;
      t = 30 * p + 12;   // crossing sample in the waveform
      checks++;
      if (got[idx] != {8'h5A, 8'h00, 16'(int'(pre) + int'(post) + 1)}) begin failures++; $display("FAIL header %h", got[idx]); end
      idx++;
      for (int k = t - int'(pre); k <= t + int'(post); k++) begin
        checks++;
        if (got[idx] != 32'(wave[k])) begin failures++; $display("FAIL snippet %0d word %0d: %0d exp %0d", p, k, got[idx], wave[k]); end
        idx++;
      end
    end
    checks++;
    if (idx != got.size()) begin failures++; $display("FAIL %0d extra words", got.size() - idx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
