// adc_serial_model -- behavioural model of two 16-channel serial ADCs for
// testbenches.
//
// Not synthesizable logic. Emits one bit per clock on 32 data lanes and two
// frame lanes, 14-bit words MSB first. ADC a starts its words PHASE[a] bits
// after time zero, so the receiver has to find the word boundary. Data lane
// c is late by c % 4 bits (board skew); the frame lanes are not. The word
// of channel c in frame f is given by word(c, f): for channels 0 and 16 it
// is the frame number, so a receiver output tells which frame it came from.
// When `analog` is set, the words come from the array `level` (one value
// per channel, offset binary, taken at the start of each word) instead,
// for end-to-end tests.
module adc_serial_model #(
  parameter int PHASE0 = 5,
  parameter int PHASE1 = 11
) (
  input  logic        clk,
  output logic [31:0] data_lane,
  output logic [1:0]  frame_lane
);
  longint t = 0;
  bit analog = 0;
  logic [13:0] level [32];
  logic [13:0] cur [32];      // level latched at the start of each word

  initial foreach (level[i]) begin level[i] = 14'h2000; cur[i] = 14'h2000; end

  function automatic logic [13:0] word(int c, longint f);
    if (c % 16 == 0) return 14'(f);
    return 14'(c * 1237 + f * 97);
  endfunction

  function automatic int skew(int c);
    return c % 4;
  endfunction

  function automatic logic lane_bit(int c, longint tt, int phase, bit is_frame);
    longint rel, f;
    int pos;
    rel = tt - longint'(phase);
    if (rel < 0) return 1'b0;
    f = rel / 14;
    pos = int'(rel % 14);
    if (is_frame) return pos < 7;
    if (analog) return cur[c][13 - pos];
    return word(c, f)[13 - pos];
  endfunction

  initial begin
    data_lane = '0;
    frame_lane = '0;
  end

  always @(posedge clk) begin
    for (int c = 0; c < 32; c++) begin
      longint rel;
      rel = t - longint'(skew(c)) - ((c < 16) ? longint'(PHASE0) : longint'(PHASE1));
      if (rel >= 0 && rel % 14 == 0) cur[c] = level[c];
    end
    for (int c = 0; c < 32; c++)
      data_lane[c] <= lane_bit(c, t - longint'(skew(c)), (c < 16) ? PHASE0 : PHASE1, 0);
    frame_lane[0] <= lane_bit(0, t, PHASE0, 1);
    frame_lane[1] <= lane_bit(0, t, PHASE1, 1);
    t <= t + 1;
  end
endmodule
