// adc_lane_deser -- one serial ADC lane: programmable delay, then
// serial-to-parallel conversion into BITS-bit words.
//
// The lane is sampled once per bit period (one clock per bit here). The
// sampled bit passes a delay line whose length, 0..2^DLY_W-1 bit periods, is
// set by `delay`; this aligns lanes with different board skew. A bit
// counter cuts the stream into words, MSB first; every BITS bits the word
// is output with a one-clock word_valid. A `slip` pulse makes the counter
// skip one bit, moving the word boundary by one bit, which the caller uses
// to align words to the ADC frame. Word boundary timing: word_valid is high
// the clock after the last bit of a word entered the shift register.
//
// Helper of adc_interface. The delay in whole bit periods and the
// one-clock-per-bit sampling are own choices; the paper names programmable
// data delay and bit-slip only.
module adc_lane_deser #(
  parameter int BITS  = 14,
  parameter int DLY_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             bit_in,
  input  logic [DLY_W-1:0] delay,
  input  logic             slip,
  output logic [BITS-1:0]  word,
  output logic             word_valid
);

  localparam int DEPTH = 2**DLY_W;

  logic [DEPTH-1:0]        dline;
  logic                    dbit;
  logic [BITS-1:0]         shreg;
  logic [$clog2(BITS)-1:0] cnt;

  assign dbit = (delay == '0) ? bit_in : dline[delay - 1'b1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dline      <= '0;
      shreg      <= '0;
      cnt        <= '0;
      word       <= '0;
      word_valid <= 1'b0;
    end else begin
      dline      <= {dline[DEPTH-2:0], bit_in};
      shreg      <= {shreg[BITS-2:0], dbit};
      word_valid <= 1'b0;
      // On slip the counter holds for one bit: the boundary moves one bit.
      if (!slip) begin
        if (cnt == ($clog2(BITS))'(BITS - 1)) begin
          cnt        <= '0;
          word       <= {shreg[BITS-2:0], dbit};
          word_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
