// czt_pkg -- constants, types and the register map shared by the CZT
// detector readout firmware.
//
// The readout digitises 32 analog channels (14-bit ADC words) coming from a
// 32-channel charge amplifier that serves a 3 x 3 array of virtual
// Frisch-grid CZT bars. Each bar has one anode and four side pads; adjacent
// bars share side pads, so 29 channels carry detector signals and 3 are
// spare. Every channel is processed independently (decimation, DC estimation,
// 32-tap convolution); per bar, the anode peak is detected and the four pad
// values are latched, and the resulting event goes to a DMA FIFO.
//
// Channel count, ADC resolution, bar count and the 32-sample window follow
// the published design. Internal word widths, the event word format and the
// register map are this implementation's own choices.
package czt_pkg;

  // ---- array geometry and converter --------------------------------------
  localparam int N_CH        = 32;   // ADC channels (two 16-channel ADCs)
  localparam int N_ADC       = 2;    // number of ADC chips, one frame lane each
  localparam int ADC_BITS    = 14;   // ADC resolution
  localparam int N_CRYSTALS  = 9;    // 3 x 3 CZT bars
  localparam int N_PADS      = 4;    // side pads P1..P4 per bar
  localparam int CONV_LEN    = 32;   // convolution window length

  // ---- internal datapath widths (own choice) -----------------------------
  localparam int SAMPLE_W    = 16;   // decimated sample, signed
  localparam int COEF_W      = 8;    // window coefficient, signed
  localparam int CONV_W      = 32;   // convolution result, signed
  localparam int DECIM_MAX_W = 7;    // decimation factor n: 1..127
  localparam int CH_W        = $clog2(N_CH);
  localparam int CRY_W       = 4;

  typedef logic signed [ADC_BITS-1:0] adc_word_t;
  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [COEF_W-1:0]   coef_t;
  typedef logic signed [CONV_W-1:0]   conv_t;

  // One detected interaction in one bar.
  typedef struct packed {
    logic [CRY_W-1:0] crystal;     // bar index 0..8
    logic [31:0]      timestamp;   // clock count at the anode peak
    conv_t            anode;       // anode peak (or valley) amplitude A
    conv_t            noise;       // baseline sample N taken before the trigger
    conv_t [N_PADS-1:0] pad;       // latched pad values P1..P4
  } event_t;

  // Words written to the DMA FIFO per event:
  //   0: {8'hE5, 4'h0, crystal, sequence[15:0]}
  //   1: timestamp   2: anode   3..6: pad P1..P4   7: noise
  localparam int EVENT_WORDS = 8;
  localparam logic [7:0] EVENT_MARK = 8'hE5;

  // Selected signal for the single-channel stream.
  typedef enum logic [1:0] {
    STAGE_RAW   = 2'd0,   // ADC word
    STAGE_DECIM = 2'd1,   // after decimation
    STAGE_CONV  = 2'd2    // after DC removal and convolution
  } stage_e;

  // Bar-to-channel map of one bar: anode channel and four pad channels.
  typedef struct packed {
    logic [CH_W-1:0] p4;
    logic [CH_W-1:0] p3;
    logic [CH_W-1:0] p2;
    logic [CH_W-1:0] p1;
    logic [CH_W-1:0] anode;
  } chmap_t;

  // Default map (own choice; the map is programmable). Bar c uses channel c
  // as its anode and channels 9+2c .. 12+2c as its pads, so neighbouring bars
  // share two pads, 20 pad channels (9..28) are used and 29..31 stay spare.
  function automatic chmap_t default_map(int c);
    chmap_t m;
    m.anode = CH_W'(c);
    m.p1    = CH_W'(9 + 2*c);
    m.p2    = CH_W'(10 + 2*c);
    m.p3    = CH_W'(11 + 2*c);
    m.p4    = CH_W'(12 + 2*c);
    return m;
  endfunction

  // Run-time settings common to all channels, decoded from the registers.
  typedef struct packed {
    logic        run;            // start / stop event acquisition
    logic        dc_en;          // DC estimation and removal on
    logic        stream_en;      // single-channel stream on
    logic        snippet_mode;   // 0: continuous stream, 1: triggered snippets
    logic [DECIM_MAX_W-1:0] decim_n;   // decimation / integration window
    logic [3:0]  lsb_drop;       // LSBs removed after decimation
    logic [3:0]  dc_k;           // DC averaging shift
    logic [3:0]  dc_thr;         // DC outlier threshold shift
    logic [7:0]  dc_holdoff;     // DC hold-off samples after an outlier
    logic [7:0]  pad_delay;      // pad latch delay, samples after the peak
    logic [4:0]  noise_back;     // noise sample look-back
    logic [CH_W-1:0] stream_ch;  // streamed channel
    stage_e      stream_stage;   // streamed processing stage
    logic [7:0]  stream_pre;     // snippet pre-trigger samples
    logic [11:0] stream_post;    // snippet post-trigger samples
    logic [31:0] stream_level;   // snippet trigger level
  } cfg_t;

  // ---- register map (word addresses) -------------------------------------
  localparam int ADDR_W = 12;
  localparam logic [ADDR_W-1:0] R_CTRL      = 12'h000; // [0] run [1] dc_en [2] stream_en [3] snippet mode [4] clear counters
  localparam logic [ADDR_W-1:0] R_STATUS    = 12'h001; // ro: [0] adc aligned [1] i2c busy [2] i2c nack [3] fifo overflow seen [31:16] fifo level
  localparam logic [ADDR_W-1:0] R_DECIM     = 12'h002; // [6:0] n  [11:8] LSBs dropped
  localparam logic [ADDR_W-1:0] R_DC        = 12'h003; // [3:0] averaging shift k [7:4] variance threshold shift [15:8] hold-off samples
  localparam logic [ADDR_W-1:0] R_PEAK      = 12'h004; // [7:0] pad latch delay [12:8] noise look-back
  localparam logic [ADDR_W-1:0] R_STREAM    = 12'h005; // [4:0] channel [9:8] stage [17:10] pre-trigger samples
  localparam logic [ADDR_W-1:0] R_STRM_LVL  = 12'h006; // snippet trigger level (signed)
  localparam logic [ADDR_W-1:0] R_STRM_POST = 12'h007; // [11:0] post-trigger samples
  localparam logic [ADDR_W-1:0] R_ADC_DLY   = 12'h008; // wo: [13:8] lane [3:0] delay in bit periods
  localparam logic [ADDR_W-1:0] R_I2C_CTRL  = 12'h009; // [0] start(wo) [1] read [3:2] bytes-1 [14:8] address [31:16] SCL phase length - 1
  localparam logic [ADDR_W-1:0] R_I2C_WDATA = 12'h00A; // bytes to write, byte 0 in [7:0]
  localparam logic [ADDR_W-1:0] R_I2C_RDATA = 12'h00B; // ro: bytes read, byte 0 in [7:0]
  localparam logic [ADDR_W-1:0] R_EV_COUNT  = 12'h00C; // ro: events written to the DMA FIFO
  localparam logic [ADDR_W-1:0] R_EV_DROP   = 12'h00D; // ro: events lost because a bar's event slot was full
  localparam logic [ADDR_W-1:0] R_STRM_LOST = 12'h00E; // ro: stream samples lost in continuous mode
  localparam logic [ADDR_W-1:0] R_ADC_SLIP  = 12'h00F; // ro: [15:0] bit slips of ADC 0 [31:16] of ADC 1
  localparam logic [ADDR_W-1:0] R_SNIPPETS  = 12'h010; // ro: snippets sent
  localparam logic [ADDR_W-1:0] R_ARMED     = 12'h011; // ro: bit c set while bar c follows a pulse
  localparam logic [ADDR_W-1:0] R_TRIG_BASE = 12'h040; // +c: [30:0] trigger level [31] valley (negative pulse) mode
  localparam logic [ADDR_W-1:0] R_MAP_BASE  = 12'h080; // +c: chmap_t
  localparam logic [ADDR_W-1:0] R_COEF_BASE = 12'h400; // +32*ch+tap: [7:0] coefficient (wo)

endpackage
