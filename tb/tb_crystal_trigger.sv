// tb_crystal_trigger -- self-checking test of anode peak detection and pad
// latching for one bar.
//
// Builds waveforms of a flat baseline with noise followed by a pulse (rise,
// slowly rising top, fall), with random pad waveforms, and feeds them one
// sample per strobe. The expected event is found here by scanning the
// waveform: trigger crossing, noise sample before it, the maximum, the
// first non-increasing sample and the pad values pad_delay samples later.
// Covers positive pulses, valley mode, several pad delays, a full event
// slot (the second event must be dropped) and run = 0 (no events).
module tb_crystal_trigger;
  import czt_pkg::*;

  localparam int L = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run = 1'b1;
  logic [3:0] crystal_id = 4'd5;
  logic [31:0] timestamp = '0;
  logic in_valid = 1'b0;
  conv_t anode = '0;
  conv_t [3:0] pads = '0;
  logic [30:0] trig_level = 31'd1000;
  logic valley = 1'b0;
  logic [7:0] pad_delay = 8'd0;
  logic [4:0] noise_back = 5'd10;
  event_t ev;
  logic ev_valid, ev_ready = 1'b1, drop, armed;
  int checks = 0, failures = 0, drops = 0;

  event_t first;
  int wave [L];
  int padw [L][4];

  crystal_trigger dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && drop) drops++;

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pulse of height amp starting at t0; sign s.
  task automatic make_wave(input int amp, input int t0, input int s);
    for (int i = 0; i < L; i++) begin
      int v;
      if (i < t0)            v = $urandom_range(0, 40) - 20;
      else if (i < t0 + 10)  v = amp * (i - t0 + 1) / 12;
      else if (i < t0 + 40)  v = amp * 10 / 12 + (amp / 6) * (i - t0 - 10) / 30;
      else if (i < t0 + 60)  v = amp - amp * (i - t0 - 40) / 20;
      else                   v = $urandom_range(0, 40) - 20;
      wave[i] = s * v;
      for (int p = 0; p < 4; p++) padw[i][p] = int'($urandom_range(0, 20000)) - 10000;
    end
  endtask

  task automatic feed(input int ts0);
    for (int i = 0; i < L; i++) begin
      @(negedge clk);
      in_valid = 1'b1; anode = wave[i];
      for (int p = 0; p < 4; p++) pads[p] = padw[i][p];
      timestamp = 32'(ts0 + i);
      @(negedge clk);
      in_valid = 1'b0;
    end
  endtask

  task automatic expect_event(input int s, input int ts0);
    int a [L];
    int i, j, peak, tpk, lat;
    for (int q = 0; q < L; q++) a[q] = s * wave[q];
    i = 0;
    while (a[i] <= int'(trig_level)) i++;
    peak = a[i]; tpk = i; j = i + 1;
    while (a[j] > peak) begin peak = a[j]; tpk = j; j++; end
    lat = j + int'(pad_delay);
    checks++;
    if (!ev_valid) begin failures++; $display("FAIL no event"); return; end
    checks += 6;
    if (ev.crystal != crystal_id) begin failures++; $display("FAIL crystal id"); end
    if (ev.anode != peak) begin failures++; $display("FAIL anode %0d exp %0d", ev.anode, peak); end
    if (ev.timestamp != 32'(ts0 + tpk)) begin failures++; $display("FAIL timestamp %0d exp %0d", ev.timestamp, ts0 + tpk); end
    if (ev.noise != a[i - int'(noise_back) - 1]) begin failures++; $display("FAIL noise %0d exp %0d", ev.noise, a[i - int'(noise_back) - 1]); end
    for (int p = 0; p < 4; p++)
      if (ev.pad[p] != padw[lat][p]) begin failures++; $display("FAIL pad%0d delay %0d: %0d exp %0d", p, pad_delay, ev.pad[p], padw[lat][p]); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    ev_ready = 1'b0;   // hold the event to inspect it
    foreach (wave[q]) wave[q] = 0;
    for (int d = 0; d < 4; d++) begin
      pad_delay = 8'(d * 7);
      make_wave(8000 + 1000 * d, 40 + d, 1);
      feed(1000 * d);
      expect_event(1, 1000 * d);
      @(negedge clk); ev_ready = 1'b1; @(negedge clk); ev_ready = 1'b0;
      checks++;
      if (ev_valid) begin failures++; $display("FAIL slot not freed"); end
    end
    // valley mode: negative pulse
    valley = 1'b1; pad_delay = 8'd3; noise_back = 5'd4;
    make_wave(6000, 50, -1);
    feed(5000);
    expect_event(-1, 5000);
    first = ev;
    // slot still full: the next event is lost
    make_wave(7000, 45, -1);
    feed(6000);
    checks++;
    if (drops != 1) begin failures++; $display("FAIL drops=%0d", drops); end
    checks++;
    if (!ev_valid || ev != first) begin failures++; $display("FAIL held event changed"); end
    ev_ready = 1'b1;
    @(negedge clk);
    // stopped: nothing is detected
    run = 1'b0;
    make_wave(7000, 45, -1);
    feed(7000);
    checks++;
    if (ev_valid) begin failures++; $display("FAIL event while stopped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
