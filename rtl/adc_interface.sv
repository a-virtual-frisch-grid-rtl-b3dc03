// adc_interface -- receiver for the serial outputs of the two 16-channel
// 14-bit ADCs, with per-lane programmable delay and automatic bit-slip.
//
// Each ADC sends one serial data lane per channel and a frame lane, all
// MSB first, one bit per clock here. Every lane goes through an
// adc_lane_deser (delay line plus deserialiser). Alignment runs per ADC: the
// frame lane is deserialised like a data lane, and while its word differs
// from FRAME_PATTERN (the frame signal high for the first half of a word,
// low for the second) the aligner pulses `slip` to all lanes of that ADC at
// once, waits two words for the new boundary to settle and checks again.
// After LOCK_WORDS matching frame words in a row the ADC counts as aligned;
// a mismatch later drops `aligned` and restarts the search, so alignment
// is automatic and continuous. Lane delays are written one lane at a time
// (dly_we, dly_lane, dly_val); lanes 0..31 are data, 32 and 33 the frames.
//
// Output: samples[ch] is the word of channel ch converted from offset binary
// to two's complement (MSB inverted); sample_valid pulses once per frame of
// ADC 0, and the words of ADC 1 are the latest it delivered. Channels 0..15
// come from ADC 0, 16..31 from ADC 1.
//
// The paper lists a high-speed ADC interface with auto-bit-slip and
// programmable data delay. Frame pattern, lock rule, one clock per bit and
// the offset-binary format are own choices based on common serial-LVDS ADCs.
module adc_interface
  import czt_pkg::*;
#(
  parameter int NCH        = N_CH,
  parameter int NADC       = N_ADC,
  parameter int BITS       = ADC_BITS,
  parameter int LOCK_WORDS = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NCH-1:0]             data_lane,
  input  logic [NADC-1:0]            frame_lane,
  input  logic                       dly_we,
  input  logic [5:0]                 dly_lane,
  input  logic [3:0]                 dly_val,
  output logic signed [BITS-1:0]     samples [NCH],
  output logic                       sample_valid,
  output logic [NADC-1:0]            aligned,
  output logic [NADC-1:0][15:0]      slip_count
);

  localparam int CPA = NCH / NADC;          // channels per ADC
  localparam logic [BITS-1:0] FRAME_PATTERN = {{(BITS - BITS/2){1'b1}}, {(BITS/2){1'b0}}};

  logic [3:0]      dly      [NCH + NADC];
  logic [BITS-1:0] dword    [NCH];
  logic [NCH-1:0]  dvalid;
  logic [BITS-1:0] fword    [NADC];
  logic [NADC-1:0] fvalid;
  logic [NADC-1:0] slip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCH + NADC; i++) dly[i] <= '0;
    end else if (dly_we && int'(dly_lane) < NCH + NADC) begin
      dly[dly_lane] <= dly_val;
    end
  end

  for (genvar c = 0; c < NCH; c++) begin : g_data
    adc_lane_deser #(.BITS(BITS)) u_lane (
      .clk, .rst_n,
      .bit_in     (data_lane[c]),
      .delay      (dly[c]),
      .slip       (slip[c / CPA]),
      .word       (dword[c]),
      .word_valid (dvalid[c])
    );
  end

  for (genvar a = 0; a < NADC; a++) begin : g_adc
    logic [1:0] settle;
    logic [2:0] good;

    adc_lane_deser #(.BITS(BITS)) u_frame (
      .clk, .rst_n,
      .bit_in     (frame_lane[a]),
      .delay      (dly[NCH + a]),
      .slip       (slip[a]),
      .word       (fword[a]),
      .word_valid (fvalid[a])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        slip[a]       <= 1'b0;
        settle        <= '0;
        good          <= '0;
        aligned[a]    <= 1'b0;
        slip_count[a] <= '0;
      end else begin
        slip[a] <= 1'b0;
        if (fvalid[a]) begin
          if (settle != '0) begin
            settle <= settle - 1'b1;
          end else if (fword[a] == FRAME_PATTERN) begin
            if (good != 3'(LOCK_WORDS)) good <= good + 1'b1;
            if (good == 3'(LOCK_WORDS - 1)) aligned[a] <= 1'b1;
          end else begin
            good          <= '0;
            aligned[a]    <= 1'b0;
            slip[a]       <= 1'b1;
            settle        <= 2'd2;
            slip_count[a] <= slip_count[a] + 1'b1;
          end
        end
      end
    end

    // Hold the latest word of every channel of this ADC.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < CPA; i++) samples[a*CPA + i] <= '0;
      end else begin
        for (int i = 0; i < CPA; i++)
          if (dvalid[a*CPA + i])
            samples[a*CPA + i] <= $signed({~dword[a*CPA + i][BITS-1], dword[a*CPA + i][BITS-2:0]});
      end
    end
  end

  // One strobe per ADC-0 frame, one clock after its words are held.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sample_valid <= 1'b0;
    else        sample_valid <= dvalid[0];
  end

endmodule
