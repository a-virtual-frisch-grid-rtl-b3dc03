// tb_ctrl_regs -- self-checking test of the register file.
//
// Checks reset values, write/read-back of every setting register, the
// decoded settings, the coefficient, lane-delay and I2C start strobes
// (one clock, with the decoded channel/tap/lane), status reporting, the
// lost-event counter and the clear bit.
module tb_ctrl_regs;
  import czt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 1'b0;
  logic [ADDR_W-1:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  cfg_t cfg;
  logic [30:0] trig_level [N_CRYSTALS];
  logic [N_CRYSTALS-1:0] valley;
  chmap_t chmap [N_CRYSTALS];
  logic coef_we;
  logic [CH_W-1:0] coef_ch;
  logic [4:0] coef_tap;
  coef_t coef_data;
  logic dly_we;
  logic [5:0] dly_lane;
  logic [3:0] dly_val;
  logic i2c_start, i2c_rw;
  logic [1:0] i2c_nbytes_m1;
  logic [6:0] i2c_addr;
  logic [15:0] i2c_div;
  logic [31:0] i2c_wdata;
  logic [N_ADC-1:0] adc_aligned = 2'b11;
  logic i2c_busy = 1'b0, i2c_nack = 1'b1;
  logic [31:0] i2c_rdata = 32'hCAFE_0123;
  logic [15:0] fifo_level = 16'd77;
  logic fifo_overflow = 1'b0;
  logic [31:0] ev_count = 32'd10;
  logic [N_CRYSTALS-1:0] ev_drop = '0;
  logic [31:0] stream_lost = 32'd5;
  logic [N_ADC-1:0][15:0] slip_count = {16'd9, 16'd4};
  logic [31:0] snippets = 32'd21;
  logic [N_CRYSTALS-1:0] armed = 9'h105;
  int checks = 0, failures = 0;

  ctrl_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [ADDR_W-1:0] a, input logic [31:0] d);
    @(negedge clk); we = 1'b1; addr = a; wdata = d;
    @(negedge clk); we = 1'b0;
  endtask

  task automatic rd_check(input logic [ADDR_W-1:0] a, input logic [31:0] exp, input string what);
    @(negedge clk); addr = a; #1;
    checks++;
    if (rdata !== exp) begin failures++; $display("FAIL %s: read %h exp %h", what, rdata, exp); end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(!cfg.run && cfg.dc_en && cfg.decim_n == 4, "reset values");
    check(chmap[3] == default_map(3) && chmap[3].p4 == 5'd18, "default map");
    wr(R_CTRL, 32'h0000_000F);
    check(cfg.run && cfg.dc_en && cfg.stream_en && cfg.snippet_mode, "ctrl bits");
    rd_check(R_CTRL, 32'h0000_000F, "ctrl");
    wr(R_DECIM, 32'h0000_0A13);
    check(cfg.decim_n == 7'h13 && cfg.lsb_drop == 4'hA, "decim fields");
    rd_check(R_DECIM, 32'h0000_0A13, "decim");
    wr(R_DC, 32'h0000_2057);
    check(cfg.dc_k == 7 && cfg.dc_thr == 5 && cfg.dc_holdoff == 8'h20, "dc fields");
    wr(R_PEAK, 32'h0000_0C09);
    check(cfg.pad_delay == 9 && cfg.noise_back == 12, "peak fields");
    wr(R_STREAM, 32'h0000_4A07);
    check(cfg.stream_ch == 7 && cfg.stream_stage == STAGE_CONV && cfg.stream_pre == 8'h12, "stream fields");
    rd_check(R_STREAM, 32'h0000_4A07, "stream");
    wr(R_STRM_LVL, 32'hFFFF_FF00);
    check(cfg.stream_level == 32'hFFFF_FF00, "stream level");
    wr(R_TRIG_BASE + 12'd4, 32'h8000_1234);
    check(trig_level[4] == 31'h1234 && valley[4] && !valley[3], "trigger of bar 4");
    rd_check(R_TRIG_BASE + 12'd4, 32'h8000_1234, "trigger read");
    wr(R_MAP_BASE + 12'd8, 32'(chmap_t'{p4: 5'd31, p3: 5'd30, p2: 5'd29, p1: 5'd1, anode: 5'd2}));
    check(chmap[8].anode == 2 && chmap[8].p1 == 1 && chmap[8].p4 == 31, "map of bar 8");
    // coefficient strobe: channel 5, tap 17
    @(negedge clk); we = 1'b1; addr = R_COEF_BASE + 12'(5 * 32 + 17); wdata = 32'h0000_00F3;
    @(negedge clk); we = 1'b0;
    check(coef_we && coef_ch == 5 && coef_tap == 17 && coef_data == -8'sd13, "coefficient strobe");
    @(negedge clk);
    check(!coef_we, "coefficient strobe is one clock");
    // lane delay strobe
    @(negedge clk); we = 1'b1; addr = R_ADC_DLY; wdata = 32'h0000_2107;
    @(negedge clk); we = 1'b0;
    check(dly_we && dly_lane == 6'h21 && dly_val == 7, "delay strobe");
    // I2C
    wr(R_I2C_WDATA, 32'h1122_3344);
    @(negedge clk); we = 1'b1; addr = R_I2C_CTRL; wdata = {16'd99, 1'b0, 7'h2A, 4'd0, 2'd3, 1'b1, 1'b1};
    @(negedge clk); we = 1'b0;
    check(i2c_start && i2c_rw && i2c_nbytes_m1 == 3 && i2c_addr == 7'h2A && i2c_div == 99 && i2c_wdata == 32'h1122_3344, "i2c request");
    @(negedge clk);
    check(!i2c_start, "i2c start is one clock");
    rd_check(R_I2C_RDATA, 32'hCAFE_0123, "i2c read data");
    // status and counters
    @(negedge clk); fifo_overflow = 1'b1; @(negedge clk); fifo_overflow = 1'b0;
    rd_check(R_STATUS, {16'd77, 12'd0, 1'b1, 1'b1, 1'b0, 1'b1}, "status");
    @(negedge clk); ev_drop = 9'b000100101; @(negedge clk); ev_drop = '0;
    rd_check(R_EV_DROP, 32'd3, "drop counter");
    rd_check(R_EV_COUNT, 32'd10, "event counter");
    rd_check(R_STRM_LOST, 32'd5, "stream lost");
    rd_check(R_ADC_SLIP, 32'h0009_0004, "bit-slip counts");
    rd_check(R_SNIPPETS, 32'd21, "snippet count");
    rd_check(R_ARMED, 32'h0000_0105, "armed bars");
    wr(R_CTRL, 32'h0000_0013);
    rd_check(R_EV_COUNT, 32'd0, "event counter cleared");
    rd_check(R_EV_DROP, 32'd0, "drop counter cleared");
    rd_check(R_STATUS, {16'd77, 12'd0, 1'b0, 1'b1, 1'b0, 1'b1}, "overflow flag cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
