// ctrl_regs -- host-visible control and status registers of the readout.
//
// A simple single-clock register bus: a write takes effect on the clock edge
// where `we` is high; reads are combinational from `addr`. The registers
// hold every run-time parameter of the processing path (decimation window
// and LSB drop, DC estimation on/off and its constants, per-bar trigger
// level and polarity, pad latch delay, bar-to-channel map, stream
// selection) plus start/stop. Writes to the coefficient window
// (R_COEF_BASE + 32*channel + tap) and to R_ADC_DLY are not stored here but
// forwarded as one-clock write strobes to the convolvers and the ADC
// receiver; a write of R_I2C_CTRL with bit 0 set pulses i2c_start. Status
// registers report ADC alignment, I2C state, FIFO level and a sticky FIFO
// overflow flag, the event and lost-event counters, the ADC bit-slip counts,
// the snippet count and which bars are following a pulse; writing R_CTRL with
// bit 4 set clears the counters and the sticky flag. Addresses and reset
// values are listed in czt_pkg.
//
// The paper says parameters are adjusted at run time and that the host
// application starts, stops and polls the firmware. The register map, reset
// values and bus are own choices.
module ctrl_regs
  import czt_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // register bus
  input  logic                 we,
  input  logic [ADDR_W-1:0]    addr,
  input  logic [31:0]          wdata,
  output logic [31:0]          rdata,
  // settings
  output cfg_t                 cfg,
  output logic [30:0]          trig_level [N_CRYSTALS],
  output logic [N_CRYSTALS-1:0] valley,
  output chmap_t               chmap [N_CRYSTALS],
  output logic                 coef_we,
  output logic [CH_W-1:0]      coef_ch,
  output logic [4:0]           coef_tap,
  output coef_t                coef_data,
  output logic                 dly_we,
  output logic [5:0]           dly_lane,
  output logic [3:0]           dly_val,
  output logic                 i2c_start,
  output logic                 i2c_rw,
  output logic [1:0]           i2c_nbytes_m1,
  output logic [6:0]           i2c_addr,
  output logic [15:0]          i2c_div,
  output logic [31:0]          i2c_wdata,
  // status
  input  logic [N_ADC-1:0]     adc_aligned,
  input  logic                 i2c_busy,
  input  logic                 i2c_nack,
  input  logic [31:0]          i2c_rdata,
  input  logic [15:0]          fifo_level,
  input  logic                 fifo_overflow,
  input  logic [31:0]          ev_count,
  input  logic [N_CRYSTALS-1:0] ev_drop,
  input  logic [31:0]          stream_lost,
  input  logic [N_ADC-1:0][15:0] slip_count,
  input  logic [31:0]          snippets,
  input  logic [N_CRYSTALS-1:0] armed
);

  logic        ovf_seen;
  logic [31:0] drop_count;
  logic [31:0] ev_base;      // ev_count at the last clear
  logic [31:0] i2c_ctrl_q;
  logic        clear;

  assign clear = we && (addr == R_CTRL) && wdata[4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.run          <= 1'b0;
      cfg.dc_en        <= 1'b1;
      cfg.stream_en    <= 1'b0;
      cfg.snippet_mode <= 1'b0;
      cfg.decim_n      <= DECIM_MAX_W'(4);
      cfg.lsb_drop     <= 4'd2;
      cfg.dc_k         <= 4'd6;
      cfg.dc_thr       <= 4'd4;
      cfg.dc_holdoff   <= 8'd64;
      cfg.pad_delay    <= 8'd0;
      cfg.noise_back   <= 5'd16;
      cfg.stream_ch    <= '0;
      cfg.stream_stage <= STAGE_RAW;
      cfg.stream_pre   <= 8'd32;
      cfg.stream_post  <= 12'd96;
      cfg.stream_level <= 32'd1000;
      for (int c = 0; c < N_CRYSTALS; c++) begin
        trig_level[c] <= 31'd1000;
        chmap[c]      <= default_map(c);
      end
      valley     <= '0;
      i2c_ctrl_q <= '0;
      i2c_wdata  <= '0;
    end else if (we) begin
      unique case (addr)
        R_CTRL: begin
          cfg.run          <= wdata[0];
          cfg.dc_en        <= wdata[1];
          cfg.stream_en    <= wdata[2];
          cfg.snippet_mode <= wdata[3];
        end
        R_DECIM: begin
          cfg.decim_n  <= wdata[DECIM_MAX_W-1:0];
          cfg.lsb_drop <= wdata[11:8];
        end
        R_DC: begin
          cfg.dc_k       <= wdata[3:0];
          cfg.dc_thr     <= wdata[7:4];
          cfg.dc_holdoff <= wdata[15:8];
        end
        R_PEAK: begin
          cfg.pad_delay  <= wdata[7:0];
          cfg.noise_back <= wdata[12:8];
        end
        R_STREAM: begin
          cfg.stream_ch    <= wdata[CH_W-1:0];
          cfg.stream_stage <= stage_e'(wdata[9:8]);
          cfg.stream_pre   <= wdata[17:10];
        end
        R_STRM_LVL:  cfg.stream_level <= wdata;
        R_STRM_POST: cfg.stream_post  <= wdata[11:0];
        R_I2C_CTRL:  i2c_ctrl_q       <= wdata;
        R_I2C_WDATA: i2c_wdata        <= wdata;
        default: begin
          for (int c = 0; c < N_CRYSTALS; c++) begin
            if (addr == R_TRIG_BASE + ADDR_W'(c)) begin
              trig_level[c] <= wdata[30:0];
              valley[c]     <= wdata[31];
            end
            if (addr == R_MAP_BASE + ADDR_W'(c)) chmap[c] <= chmap_t'(wdata[5*CH_W-1:0]);
          end
        end
      endcase
    end
  end

  assign i2c_rw        = i2c_ctrl_q[1];
  assign i2c_nbytes_m1 = i2c_ctrl_q[3:2];
  assign i2c_addr      = i2c_ctrl_q[14:8];
  assign i2c_div       = i2c_ctrl_q[31:16];

  // Strobes forwarded to the datapath.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coef_we   <= 1'b0;
      coef_ch   <= '0;
      coef_tap  <= '0;
      coef_data <= '0;
      dly_we    <= 1'b0;
      dly_lane  <= '0;
      dly_val   <= '0;
      i2c_start <= 1'b0;
    end else begin
      coef_we   <= we && (addr >= R_COEF_BASE) && (addr < R_COEF_BASE + ADDR_W'(N_CH * CONV_LEN));
      coef_ch   <= CH_W'((addr - R_COEF_BASE) >> 5);
      coef_tap  <= addr[4:0];
      coef_data <= coef_t'(wdata[COEF_W-1:0]);
      dly_we    <= we && (addr == R_ADC_DLY);
      dly_lane  <= wdata[13:8];
      dly_val   <= wdata[3:0];
      i2c_start <= we && (addr == R_I2C_CTRL) && wdata[0];
    end
  end

  // Counters and sticky flags.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovf_seen   <= 1'b0;
      drop_count <= '0;
      ev_base    <= '0;
    end else if (clear) begin
      ovf_seen   <= 1'b0;
      drop_count <= '0;
      ev_base    <= ev_count;
    end else begin
      if (fifo_overflow) ovf_seen <= 1'b1;
      drop_count <= drop_count + 32'($countones(ev_drop));
    end
  end

  always_comb begin
    rdata = '0;
    unique case (addr)
      R_CTRL:      rdata = {28'd0, cfg.snippet_mode, cfg.stream_en, cfg.dc_en, cfg.run};
      R_STATUS:    rdata = {fifo_level, 12'd0, ovf_seen, i2c_nack, i2c_busy, &adc_aligned};
      R_DECIM:     rdata = {20'd0, cfg.lsb_drop, 1'b0, cfg.decim_n};
      R_DC:        rdata = {16'd0, cfg.dc_holdoff, cfg.dc_thr, cfg.dc_k};
      R_PEAK:      rdata = {19'd0, cfg.noise_back, cfg.pad_delay};
      R_STREAM:    rdata = {14'd0, cfg.stream_pre, cfg.stream_stage, 3'd0, cfg.stream_ch};
      R_STRM_LVL:  rdata = cfg.stream_level;
      R_STRM_POST: rdata = {20'd0, cfg.stream_post};
      R_I2C_CTRL:  rdata = {i2c_ctrl_q[31:1], 1'b0};
      R_I2C_WDATA: rdata = i2c_wdata;
      R_I2C_RDATA: rdata = i2c_rdata;
      R_EV_COUNT:  rdata = ev_count - ev_base;
      R_EV_DROP:   rdata = drop_count;
      R_STRM_LOST: rdata = stream_lost;
      R_ADC_SLIP:  rdata = {slip_count[1], slip_count[0]};
      R_SNIPPETS:  rdata = snippets;
      R_ARMED:     rdata = 32'(armed);
      default: begin
        for (int c = 0; c < N_CRYSTALS; c++) begin
          if (addr == R_TRIG_BASE + ADDR_W'(c)) rdata = {valley[c], trig_level[c]};
          if (addr == R_MAP_BASE + ADDR_W'(c))  rdata = 32'(chmap[c]);
        end
      end
    endcase
  end

endmodule
