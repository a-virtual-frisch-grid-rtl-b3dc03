// tb_adc_interface -- self-checking test of the serial ADC receiver.
//
// The ADC model sends words with an unknown word boundary per ADC and a
// skew of 0..3 bits per data lane. The test programs each data lane's
// delay to 3 - skew and each frame lane's to 3, so all lanes line up, then
// waits for both ADCs to report `aligned` through automatic bit-slip. After
// that every sample strobe must carry, for every channel, the word the
// model sent in one frame (converted from offset binary), frame numbers
// must advance by one per strobe, and strobes must come every 14 clocks.
module tb_adc_interface;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] data_lane;
  logic [1:0] frame_lane;
  logic dly_we = 1'b0;
  logic [5:0] dly_lane = '0;
  logic [3:0] dly_val = '0;
  logic signed [13:0] samples [32];
  logic sample_valid;
  logic [1:0] aligned;
  logic [1:0][15:0] slip_count;
  int checks = 0, failures = 0;

  adc_interface dut (
    .clk, .rst_n, .data_lane, .frame_lane, .dly_we, .dly_lane, .dly_val,
    .samples, .sample_valid, .aligned, .slip_count
  );
  adc_serial_model #(.PHASE0(5), .PHASE1(11)) adc (.clk, .data_lane, .frame_lane);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [13:0] conv(logic [13:0] w);
    return {~w[13], w[12:0]};
  endfunction

  initial begin
    longint last_t, prev_f;
    int strobes = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 34; l++) begin
      @(negedge clk);
      dly_we = 1'b1; dly_lane = 6'(l); dly_val = (l < 32) ? 4'(3 - l % 4) : 4'd3;
    end
    @(negedge clk);
    dly_we = 1'b0;
    fork
      wait (aligned == 2'b11);
      begin repeat (20000) @(negedge clk); end
    join_any
    checks++;
    if (aligned != 2'b11) begin failures++; $display("FAIL not aligned, slips %0d %0d", slip_count[0], slip_count[1]); end
    checks++;
    if (slip_count[0] == 0 || slip_count[1] == 0) begin failures++; $display("FAIL bit-slip never used"); end
    prev_f = -1;
    while (strobes < 200) begin
      @(posedge clk);
      #1;
      if (sample_valid) begin
        longint f0, f1;
        f0 = longint'(conv(samples[0]));
        f1 = longint'(conv(samples[16]));
        if (strobes > 0) begin
          checks += 2;
          if (f0 != prev_f + 1) begin failures++; $display("FAIL frame %0d after %0d", f0, prev_f); end
          if ($time - last_t != 140) begin failures++; $display("FAIL strobe spacing %0t", $time - last_t); end
        end
        for (int c = 0; c < 32; c++) begin
          longint f;
          f = (c < 16) ? f0 : f1;
          checks++;
          if (conv(samples[c]) != adc.word(c, f)) begin failures++; $display("FAIL ch%0d frame %0d: %h exp %h", c, f, conv(samples[c]), adc.word(c, f)); end
        end
        checks++;
        if (f1 != f0 && f1 != f0 - 1) begin failures++; $display("FAIL ADC1 frame %0d vs ADC0 %0d", f1, f0); end
        prev_f = f0;
        last_t = $time;
        strobes++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
