// czt_dsp_top -- FPGA firmware of a 3 x 3 CZT virtual Frisch-grid gamma
// detector readout.
//
// Data path: the serial lanes of two 16-channel 14-bit ADCs enter
// adc_interface (lane delay, deserialisation, automatic bit-slip). Each of
// the 32 channels is then processed on its own, point by point: decimator
// (integration over n samples, LSB drop) -> dc_estimator (baseline from mean
// and variance, switchable) -> convolver (DC subtracted, 32-tap window
// chosen per channel). For each of the 9 bars a crystal_trigger takes the
// convolved anode channel and its four pad channels, chosen through the
// programmable bar-to-channel map, detects the anode peak or valley,
// samples a noise value and latches the pads after a programmable delay.
// event_packer collects the bars' events into 8-word records in the DMA
// FIFO (sync_fifo), read by the host on dma_valid/dma_ready. Independently,
// one channel at a selectable stage (raw, decimated or convolved) is sent on
// the stream port, continuously or as triggered snippets, through its own
// FIFO. An I2C master configures the front-end chip and board devices.
// Everything is set through the ctrl_regs register bus.
//
// Timing: one clock domain; the ADC lanes are sampled one bit per clock, so
// an ADC frame (one sample per channel) takes 14 clocks, and the processing
// stages run on the strobes each stage produces (all channels in lock-step).
// timestamp is a free-running clock counter.
//
// The block structure follows the published processing diagram
// (decimation/filtering with parameter n, DC estimation with on/off,
// convolution with a window, peak amplitude and latched pads, five values
// to the DMA FIFO, independent channels). Interfaces, widths, the record
// format, the register map and the single clock domain are own choices.
module czt_dsp_top
  import czt_pkg::*;
#(
  parameter int DMA_DEPTH    = 1024,
  parameter int STREAM_DEPTH = 1024
) (
  input  logic                clk,
  input  logic                rst_n,
  // ADC serial lanes
  input  logic [N_CH-1:0]     adc_data_lane,
  input  logic [N_ADC-1:0]    adc_frame_lane,
  // host register bus
  input  logic                reg_we,
  input  logic [ADDR_W-1:0]   reg_addr,
  input  logic [31:0]         reg_wdata,
  output logic [31:0]         reg_rdata,
  // DMA FIFO read side (event records)
  output logic                dma_valid,
  input  logic                dma_ready,
  output logic [31:0]         dma_data,
  // single-channel stream
  output logic                strm_valid,
  input  logic                strm_ready,
  output logic [31:0]         strm_data,
  // I2C, open drain: *_oe high pulls the line low
  output logic                scl_oe,
  output logic                sda_oe,
  input  logic                sda_i
);

  // ---------------- registers ----------------
  cfg_t                   cfg;
  logic [30:0]            trig_level [N_CRYSTALS];
  logic [N_CRYSTALS-1:0]  valley;
  chmap_t                 chmap [N_CRYSTALS];
  logic                   coef_we;
  logic [CH_W-1:0]        coef_ch;
  logic [4:0]             coef_tap;
  coef_t                  coef_data;
  logic                   dly_we;
  logic [5:0]             dly_lane;
  logic [3:0]             dly_val;
  logic                   i2c_start, i2c_rw, i2c_busy, i2c_nack;
  logic [1:0]             i2c_nb;
  logic [6:0]             i2c_addr;
  logic [15:0]            i2c_div;
  logic [31:0]            i2c_wdata, i2c_rdata;
  logic [N_ADC-1:0]       adc_aligned;
  logic [N_ADC-1:0][15:0] slip_count;
  logic [$clog2(DMA_DEPTH):0] dma_level;
  logic                   dma_overflow;
  logic [31:0]            ev_count;
  logic [N_CRYSTALS-1:0]  ev_drop;
  logic [31:0]            stream_lost;
  logic [31:0]            snippets;
  logic [N_CRYSTALS-1:0]  armed;

  ctrl_regs u_regs (
    .clk, .rst_n,
    .we (reg_we), .addr (reg_addr), .wdata (reg_wdata), .rdata (reg_rdata),
    .cfg, .trig_level, .valley, .chmap,
    .coef_we, .coef_ch, .coef_tap, .coef_data,
    .dly_we, .dly_lane, .dly_val,
    .i2c_start, .i2c_rw, .i2c_nbytes_m1 (i2c_nb), .i2c_addr, .i2c_div, .i2c_wdata,
    .adc_aligned, .i2c_busy, .i2c_nack, .i2c_rdata,
    .fifo_level (16'(dma_level)), .fifo_overflow (dma_overflow),
    .ev_count, .ev_drop, .stream_lost,
    .slip_count, .snippets, .armed
  );

  // ---------------- timestamp ----------------
  logic [31:0] timestamp;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) timestamp <= '0;
    else        timestamp <= timestamp + 1'b1;
  end

  // ---------------- ADC receiver ----------------
  adc_word_t raw [N_CH];
  logic      raw_valid;

  adc_interface u_adc (
    .clk, .rst_n,
    .data_lane (adc_data_lane), .frame_lane (adc_frame_lane),
    .dly_we, .dly_lane, .dly_val,
    .samples (raw), .sample_valid (raw_valid),
    .aligned (adc_aligned), .slip_count
  );

  // ---------------- per-channel processing ----------------
  sample_t dec      [N_CH];
  logic    dec_valid[N_CH];
  sample_t dc       [N_CH];
  conv_t   conv     [N_CH];
  logic    conv_valid[N_CH];

  for (genvar ch = 0; ch < N_CH; ch++) begin : g_ch
    logic [2*SAMPLE_W+1:0] variance;
    logic                  dc_hold;

    decimator u_dec (
      .clk, .rst_n,
      .in_valid (raw_valid), .in_data (raw[ch]),
      .n (cfg.decim_n), .lsb_drop (cfg.lsb_drop),
      .out_valid (dec_valid[ch]), .out_data (dec[ch])
    );

    dc_estimator u_dc (
      .clk, .rst_n,
      .enable (cfg.dc_en),
      .in_valid (dec_valid[ch]), .in_data (dec[ch]),
      .k (cfg.dc_k), .thr_shift (cfg.dc_thr), .holdoff (cfg.dc_holdoff),
      .dc (dc[ch]), .variance, .hold (dc_hold)
    );

    convolver u_conv (
      .clk, .rst_n,
      .in_valid (dec_valid[ch]), .in_data (dec[ch]), .dc (dc[ch]),
      .coef_we (coef_we && coef_ch == CH_W'(ch)), .coef_addr (coef_tap), .coef_data,
      .out_valid (conv_valid[ch]), .out_data (conv[ch])
    );
  end

  // ---------------- per-bar triggers ----------------
  event_t [N_CRYSTALS-1:0] ev;
  logic   [N_CRYSTALS-1:0] ev_valid, ev_ready;

  for (genvar c = 0; c < N_CRYSTALS; c++) begin : g_cry
    conv_t [N_PADS-1:0] pads;
    assign pads[0] = conv[chmap[c].p1];
    assign pads[1] = conv[chmap[c].p2];
    assign pads[2] = conv[chmap[c].p3];
    assign pads[3] = conv[chmap[c].p4];

    crystal_trigger u_trig (
      .clk, .rst_n,
      .run (cfg.run),
      .crystal_id (CRY_W'(c)),
      .timestamp,
      .in_valid (conv_valid[0]),
      .anode (conv[chmap[c].anode]),
      .pads,
      .trig_level (trig_level[c]),
      .valley (valley[c]),
      .pad_delay (cfg.pad_delay),
      .noise_back (cfg.noise_back),
      .ev (ev[c]), .ev_valid (ev_valid[c]), .ev_ready (ev_ready[c]),
      .drop (ev_drop[c]),
      .armed (armed[c])
    );
  end

  // ---------------- event records -> DMA FIFO ----------------
  logic        pk_valid, pk_ready;
  logic [31:0] pk_data;

  event_packer u_pack (
    .clk, .rst_n,
    .ev, .ev_valid, .ev_ready,
    .out_valid (pk_valid), .out_ready (pk_ready), .out_data (pk_data),
    .ev_count
  );

  sync_fifo #(.WIDTH(32), .DEPTH(DMA_DEPTH)) u_dma_fifo (
    .clk, .rst_n,
    .wr_valid (pk_valid), .wr_ready (pk_ready), .wr_data (pk_data),
    .rd_valid (dma_valid), .rd_ready (dma_ready), .rd_data (dma_data),
    .level (dma_level), .overflow (dma_overflow)
  );

  // ---------------- single-channel stream ----------------
  logic               sel_valid;
  logic signed [31:0] sel_data;
  logic               sn_valid, sn_ready;
  logic [31:0]        sn_data;
  logic [$clog2(STREAM_DEPTH):0] st_level;
  logic               st_overflow;

  always_comb begin
    unique case (cfg.stream_stage)
      STAGE_DECIM: begin sel_valid = dec_valid[cfg.stream_ch];  sel_data = 32'(dec[cfg.stream_ch]); end
      STAGE_CONV:  begin sel_valid = conv_valid[cfg.stream_ch]; sel_data = conv[cfg.stream_ch];     end
      default:     begin sel_valid = raw_valid;                 sel_data = 32'(raw[cfg.stream_ch]); end
    endcase
  end

  snippet_streamer #(.W(32), .DEPTH(1024)) u_strm (
    .clk, .rst_n,
    .enable (cfg.stream_en), .snippet_mode (cfg.snippet_mode),
    .in_valid (sel_valid), .in_data (sel_data),
    .level (cfg.stream_level), .pre (cfg.stream_pre), .post (cfg.stream_post),
    .out_valid (sn_valid), .out_ready (sn_ready), .out_data (sn_data),
    .lost (stream_lost), .snippets
  );

  sync_fifo #(.WIDTH(32), .DEPTH(STREAM_DEPTH)) u_strm_fifo (
    .clk, .rst_n,
    .wr_valid (sn_valid), .wr_ready (sn_ready), .wr_data (sn_data),
    .rd_valid (strm_valid), .rd_ready (strm_ready), .rd_data (strm_data),
    .level (st_level), .overflow (st_overflow)
  );

  // ---------------- I2C ----------------
  i2c_master u_i2c (
    .clk, .rst_n,
    .start (i2c_start), .rw (i2c_rw), .nbytes_m1 (i2c_nb), .addr (i2c_addr),
    .div (i2c_div), .wdata (i2c_wdata), .rdata (i2c_rdata),
    .busy (i2c_busy), .nack (i2c_nack),
    .scl_oe, .sda_oe, .sda_i
  );

endmodule
