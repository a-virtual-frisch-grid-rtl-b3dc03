// tb_czt_dsp_top -- end-to-end test of the readout firmware at its default
// sizes (32 channels, 9 bars, 32-tap windows, 1024-word FIFOs).
//
// A behavioural model of the two serial ADCs (skewed lanes, unknown word
// boundary) drives the firmware; a behavioural I2C target sits on the bus.
// All configuration goes through the register bus. The sequence:
//   1. program lane delays, wait for bit-slip alignment;
//   2. stream raw samples of one channel and compare with the model's level;
//   3. stream the convolved signal with DC removal on and off (mode switch);
//   4. fire each bar in turn with a rectangular anode pulse and delayed pad
//      pulses of known heights, and check the decoded DMA records: bar index,
//      anode amplitude (32 x pulse height after a rectangular window, 64 x
//      for a bar whose window was rewritten to all 2s), pad values (which
//      depend on the pad latch delay), noise sample; one bar in valley mode;
//   5. capture a triggered snippet of an anode on the stream port;
//   6. hold the DMA port, fire all bars repeatedly until the FIFO fills,
//      the packer stalls and bars lose events, then drain and account for
//      every record;
//   7. write and read the I2C target.
// Each mechanism is counted; one that never happened is a failure.
// Pulse heights and the expected values are worked out here from the ADC
// levels: with decimation n = 4 and 2 LSBs dropped, a flat ADC level L
// gives a decimated value L, and a 32-tap rectangular window gives 32 L.
module tb_czt_dsp_top;
  import czt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] adc_data_lane;
  logic [1:0]  adc_frame_lane;
  logic reg_we = 1'b0;
  logic [ADDR_W-1:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic dma_valid, dma_ready = 1'b1;
  logic [31:0] dma_data;
  logic strm_valid, strm_ready = 1'b1;
  logic [31:0] strm_data;
  logic scl_oe, sda_oe, sda_pull;
  wire  scl = !scl_oe;
  wire  sda = !(sda_oe || sda_pull);
  logic sda_i;
  assign sda_i = sda;

  int checks = 0, failures = 0;

  czt_dsp_top dut (.*);
  adc_serial_model #(.PHASE0(3), .PHASE1(9)) adc (.clk, .data_lane(adc_data_lane), .frame_lane(adc_frame_lane));
  i2c_target_model #(.ADDR(7'h2A)) target (.scl, .sda, .sda_pull);

  always #5 clk = ~clk;

  initial begin
    #60000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int FRAME = 14;   // clocks per ADC frame
  localparam int NDEC  = 4;    // decimation used in this test

  // ---------------- mechanism counters ----------------
  int n_armed = 0;
  int n_stall = 0, n_full = 0, n_records = 0;

  // ---------------- helpers ----------------
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [ADDR_W-1:0] a, input logic [31:0] d);
    @(negedge clk); reg_we = 1'b1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 1'b0;
  endtask

  task automatic rd(input logic [ADDR_W-1:0] a, output logic [31:0] d);
    @(negedge clk); reg_addr = a; #1; d = reg_rdata;
  endtask

  task automatic frames(input int k);
    repeat (k * FRAME) @(negedge clk);
  endtask

  // ADC level: signed value v around mid-scale (offset binary).
  int base [32];
  task automatic set_level(input int c, input int v);
    adc.level[c] = 14'(v + 8192);
  endtask
  task automatic baseline_all();
    for (int c = 0; c < 32; c++) set_level(c, base[c]);
  endtask

  // ---------------- DMA record collection ----------------
  typedef struct {
    int crystal, seq;
    int ts, anode, noise;
    int pad [4];
  } rec_t;
  rec_t recs [$];
  logic [31:0] wq [$];

  always begin
    logic got;
    logic [31:0] w;
    @(negedge clk);
    #4;
    got = rst_n && dma_valid && dma_ready;
    w = dma_data;
    @(posedge clk);
    if (got) begin
      wq.push_back(w);
      if (wq.size() == EVENT_WORDS) begin
        rec_t r;
        checks++;
        if (wq[0][31:24] != EVENT_MARK) begin failures++; $display("FAIL record header %h", wq[0]); end
        r.crystal = int'(wq[0][19:16]);
        r.seq = int'(wq[0][15:0]);
        r.ts = int'(wq[1]);
        r.anode = int'(signed'(wq[2]));
        for (int p = 0; p < 4; p++) r.pad[p] = int'(signed'(wq[3 + p]));
        r.noise = int'(signed'(wq[7]));
        recs.push_back(r);
        n_records++;
        wq.delete();
      end
    end
  end

  // ---------------- stream collection ----------------
  logic [31:0] sq [$];
  always @(posedge clk) if (rst_n && strm_valid && strm_ready) sq.push_back(strm_data);

  // One bar fires: anode rectangular pulse of height amp (sign s) for 48
  // decimated samples; its pads get pulses of height padamp[p] starting 8
  // decimated samples later and ending with the anode pulse.
  task automatic fire(input int c, input int amp, input int s, input int padamp [4]);
    chmap_t m;
    logic [31:0] d;
    m = default_map(c);
    set_level(int'(m.anode), base[m.anode] + s * amp);
    frames(8 * NDEC);
    rd(R_ARMED, d);
    check(d == (32'd1 << c), $sformatf("bar %0d armed during its pulse: %h", c, d));
    if (d[c]) n_armed++;
    set_level(int'(m.p1), base[m.p1] + padamp[0]);
    set_level(int'(m.p2), base[m.p2] + padamp[1]);
    set_level(int'(m.p3), base[m.p3] + padamp[2]);
    set_level(int'(m.p4), base[m.p4] + padamp[3]);
    frames(40 * NDEC);
    baseline_all();
    frames(110 * NDEC);
  endtask

  int padamp [4];
  int n_events_ok = 0, n_valley = 0, n_window = 0, n_paddelay = 0;
  int n_slip = 0, n_dc_on = 0, n_dc_off = 0, n_raw = 0, n_snippet = 0, n_drop = 0, n_i2c = 0;

  task automatic check_record(input rec_t r, input int c, input int exp_anode, input int delay, input string what);
    int tol;
    tol = 2 * 32;
    check(r.crystal == c, $sformatf("%s: bar %0d exp %0d", what, r.crystal, c));
    check(r.anode >= exp_anode - tol && r.anode <= exp_anode + tol,
          $sformatf("%s: anode %0d exp %0d", what, r.anode, exp_anode));
    check(r.noise >= -tol && r.noise <= tol, $sformatf("%s: noise %0d", what, r.noise));
    // The anode window is full 32 samples after the pulse starts; the pads
    // started 8 samples later, so 24 + delay of their samples are in the
    // window when they are latched (one sample of slack for the phase of
    // the decimation and the first non-increasing sample).
    for (int p = 0; p < 4; p++) begin
      int e;
      e = padamp[p] * (24 + delay);
      check(r.pad[p] >= e - padamp[p] - tol && r.pad[p] <= e + 2 * padamp[p] + tol,
            $sformatf("%s: pad %0d = %0d exp about %0d", what, p, r.pad[p], e));
    end
    if (r.crystal == c) n_events_ok++;
  endtask

  initial begin
    logic [31:0] d;
    int amp;
    rec_t r;
    for (int c = 0; c < 32; c++) base[c] = 300 + 7 * c;
    adc.analog = 1;
    baseline_all();
    repeat (5) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1. lane delays and alignment ----
    for (int l = 0; l < 34; l++) wr(R_ADC_DLY, {18'd0, 6'(l), 4'd0, (l < 32) ? 4'(3 - l % 4) : 4'd3});
    wr(R_DECIM, {20'd0, 4'd2, 1'b0, 7'(NDEC)});
    wr(R_DC, {16'd0, 8'd32, 4'd4, 4'd4});
    for (int i = 0; i < 200; i++) begin
      rd(R_STATUS, d);
      if (d[0]) break;
      repeat (100) @(negedge clk);
    end
    rd(R_STATUS, d);
    check(d[0], "ADC lanes aligned");
    rd(R_ADC_SLIP, d);
    n_slip = int'(d[15:0]) + int'(d[31:16]);
    check(d[15:0] > 0 && d[31:16] > 0, "bit-slip used on both ADCs");

    // ---- 2. raw stream of channel 5 ----
    wr(R_STREAM, {14'd0, 8'd8, STAGE_RAW, 3'd0, 5'd5});
    wr(R_CTRL, 32'h0000_0006);   // DC on, stream on
    frames(30);
    wr(R_CTRL, 32'h0000_0002);
    frames(2);
    check(sq.size() >= 25, $sformatf("raw stream words %0d", sq.size()));
    foreach (sq[i]) begin
      checks++;
      if (int'(signed'(sq[i])) != base[5]) begin failures++; $display("FAIL raw word %0d = %0d exp %0d", i, int'(signed'(sq[i])), base[5]); end
      else n_raw++;
    end
    sq.delete();

    // ---- 3. DC removal on / off on the convolved stream ----
    wr(R_CTRL, 32'h0000_0000);   // DC off
    wr(R_CTRL, 32'h0000_0002);   // DC on: restart acquisition with k = 4
    frames(NDEC * 600);
    wr(R_STREAM, {14'd0, 8'd8, STAGE_CONV, 3'd0, 5'd5});
    wr(R_CTRL, 32'h0000_0006);
    frames(NDEC * 10);
    wr(R_CTRL, 32'h0000_0002);
    frames(NDEC * 2);
    check(sq.size() >= 8, "convolved stream with DC removal");
    foreach (sq[i]) begin
      checks++;
      if (int'(signed'(sq[i])) < -64 || int'(signed'(sq[i])) > 64) begin failures++; $display("FAIL DC-removed value %0d", int'(signed'(sq[i]))); end
      else n_dc_on++;
    end
    sq.delete();
    wr(R_CTRL, 32'h0000_0004);   // DC off, stream on
    frames(NDEC * 40);
    sq.delete();
    frames(NDEC * 10);
    wr(R_CTRL, 32'h0000_0000);
    frames(NDEC * 2);
    check(sq.size() >= 8, "convolved stream without DC removal");
    foreach (sq[i]) begin
      checks++;
      if (int'(signed'(sq[i])) != 32 * base[5]) begin failures++; $display("FAIL no-DC value %0d exp %0d", int'(signed'(sq[i])), 32 * base[5]); end
      else n_dc_off++;
    end
    sq.delete();
    wr(R_CTRL, 32'h0000_0002);   // DC on again, let it settle
    frames(NDEC * 600);

    // ---- 4. each bar in turn ----
    for (int t = 0; t < 32; t++) wr(R_COEF_BASE + 12'(0 * 32 + t), 32'd2);   // bar 0 anode: window of 2s
    wr(R_TRIG_BASE + 12'd1, 32'h8000_0000 | 32'd1000);                       // bar 1: valley mode
    wr(R_PEAK, {19'd0, 5'd4, 8'd0});
    wr(R_CTRL, 32'h0000_0003);   // run, DC on
    for (int c = 0; c < 9; c++) begin
      amp = 1000 + 300 * c;
      for (int p = 0; p < 4; p++) padamp[p] = 100 * (p + 1) + 20 * c;
      fire(c, amp, (c == 1) ? -1 : 1, padamp);
      check(recs.size() == 1, $sformatf("one record for bar %0d, got %0d", c, recs.size()));
      if (recs.size() > 0) begin
        r = recs.pop_front();
        check_record(r, c, (c == 0 ? 64 : 32) * amp, 0, $sformatf("bar %0d", c));
        if (c == 0 && r.anode > 48 * amp) n_window++;
        if (c == 1 && r.crystal == 1) n_valley++;
      end
      recs.delete();
    end
    // pad latch delay
    wr(R_PEAK, {19'd0, 5'd4, 8'd6});
    for (int p = 0; p < 4; p++) padamp[p] = 150 * (p + 1);
    fire(4, 2000, 1, padamp);
    check(recs.size() == 1, "one record with pad delay");
    if (recs.size() > 0) begin
      r = recs.pop_front();
      check_record(r, 4, 32 * 2000, 6, "pad delay 6");
      if (r.pad[3] > padamp[3] * 28) n_paddelay++;
    end
    recs.delete();
    wr(R_PEAK, {19'd0, 5'd4, 8'd0});

    // ---- 5. triggered snippet of bar 3's anode ----
    wr(R_STREAM, {14'd0, 8'd8, STAGE_CONV, 3'd0, 5'd3});
    wr(R_STRM_LVL, 32'd5000);
    wr(R_STRM_POST, 32'd40);
    sq.delete();
    wr(R_CTRL, 32'h0000_000F);   // run, DC, stream, snippet mode
    for (int p = 0; p < 4; p++) padamp[p] = 100;
    fire(3, 1500, 1, padamp);
    wr(R_CTRL, 32'h0000_0003);
    recs.delete();
    check(sq.size() == 1 + 8 + 1 + 40, $sformatf("snippet length %0d", sq.size()));
    if (sq.size() == 50) begin
      check(sq[0] == {8'h5A, 8'h00, 16'd49}, "snippet header");
      check(int'(signed'(sq[8])) <= 5000 && int'(signed'(sq[9])) > 5000, "snippet crossing after 8 pre-trigger samples");
      check(int'(signed'(sq[49])) == 32 * 1500 || int'(signed'(sq[49])) > 30 * 1500, "snippet reaches the plateau");
      if (sq[0][31:24] == 8'h5A) n_snippet++;
      rd(R_SNIPPETS, d);
      check(d == 32'd1, $sformatf("snippet counter %0d", d));
    end
    sq.delete();

    // ---- 6. back-pressure: DMA port held, FIFO fills, events are lost ----
    wr(R_CTRL, 32'h0000_0013);   // clear counters, run, DC on
    dma_ready = 1'b0;
    for (int k = 0; k < 18; k++) begin
      for (int c = 0; c < 9; c++) set_level(c, base[c] + ((c == 1) ? -1 : 1) * 1200);
      frames(48 * NDEC);
      baseline_all();
      frames(60 * NDEC);
    end
    rd(R_EV_DROP, d);
    n_drop = int'(d);
    check(n_drop > 0, "events lost while the FIFO was full");
    rd(R_STATUS, d);
    // The sticky flag is set when the packer offered a word to the full FIFO
    // and had to wait: a stall.
    check(d[3], "FIFO overflow flag set");
    check(d[31:16] == 16'd1024, $sformatf("FIFO level %0d while held", d[31:16]));
    if (d[3]) n_stall++;
    if (d[31:16] == 16'd1024) n_full++;
    recs.delete();
    dma_ready = 1'b1;
    frames(1200);
    rd(R_EV_COUNT, d);
    check(recs.size() == int'(d), $sformatf("drained %0d records, counter %0d", recs.size(), d));
    check(recs.size() + n_drop == 18 * 9, $sformatf("records %0d + lost %0d != fired %0d", recs.size(), n_drop, 18 * 9));
    for (int i = 1; i < recs.size(); i++)
      check(recs[i].seq == ((recs[i-1].seq + 1) % 65536), "sequence numbers");
    recs.delete();

    // ---- 7. I2C ----
    wr(R_I2C_WDATA, 32'h0000_BEEF);
    wr(R_I2C_CTRL, {16'd4, 1'b0, 7'h2A, 4'd0, 2'd1, 1'b0, 1'b1});
    do rd(R_STATUS, d); while (d[1]);
    check(!d[2], "I2C write acknowledged");
    check(target.n_written == 2 && target.bytes_written[0] == 8'hEF && target.bytes_written[1] == 8'hBE, "I2C bytes written");
    wr(R_I2C_CTRL, {16'd4, 1'b0, 7'h2A, 4'd0, 2'd2, 1'b1, 1'b1});
    do rd(R_STATUS, d); while (d[1]);
    rd(R_I2C_RDATA, d);
    check(d[23:0] == {target.read_bytes[2], target.read_bytes[1], target.read_bytes[0]}, $sformatf("I2C read %h", d));
    if (target.n_written == 2 && target.bytes_written[0] == 8'hEF) n_i2c++;

    // ---- mechanism summary ----
    $display("mechanisms: raw=%0d dc_on=%0d dc_off=%0d events=%0d window=%0d valley=%0d paddelay=%0d snippet=%0d stall=%0d full=%0d drop=%0d records=%0d i2c=%0d slips=%0d",
             n_raw, n_dc_on, n_dc_off, n_events_ok, n_window, n_valley, n_paddelay, n_snippet,
             n_stall, n_full, n_drop, n_records, n_i2c, n_slip);
    check(n_slip > 0, "bit slip happened");
    check(n_armed > 0, "trigger arming seen");
    check(n_raw > 0, "raw stream happened");
    check(n_dc_on > 0 && n_dc_off > 0, "DC on/off switch happened");
    check(n_events_ok >= 9, "events from every bar");
    check(n_window > 0, "custom window used");
    check(n_valley > 0, "valley detection happened");
    check(n_paddelay > 0, "pad latch delay happened");
    check(n_snippet > 0, "snippet happened");
    check(n_stall > 0 && n_full > 0, "FIFO full / packer stall happened");
    check(n_drop > 0, "event drop happened");
    check(n_i2c > 0, "I2C transfer happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
