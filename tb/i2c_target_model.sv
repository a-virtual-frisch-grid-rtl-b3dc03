// i2c_target_model -- behavioural I2C target (slave) for testbenches.
//
// Not synthesizable logic: it watches the two bus lines, recognises START
// and STOP, takes the address byte and acknowledges it when it matches ADDR.
// In a write it acknowledges and stores every data byte (bytes_written,
// count in n_written); in a read it sends read_bytes[0], [1], ... MSB first
// and stops sending when the master answers NACK. sda_pull high means the
// model pulls SDA low. It stands in for the I2C devices on the board (the
// charge-amplifier chip and the bias devices).
module i2c_target_model #(
  parameter logic [6:0] ADDR = 7'h2A
) (
  input  logic scl,
  input  logic sda,
  output logic sda_pull
);
  logic [7:0] bytes_written [16];
  int         n_written = 0;
  logic [7:0] read_bytes [4] = '{8'hA5, 8'h3C, 8'h81, 8'h7E};
  int         starts = 0, stops = 0;

  logic [7:0] sh;
  int         bitn;
  bit         active = 0, addressed = 0, reading = 0, first = 1;
  int         rd_idx;

  initial sda_pull = 1'b0;

  // START and STOP: SDA changes while SCL is high.
  always @(negedge sda) if (scl) begin
    starts++; active = 1; first = 1; bitn = 0; addressed = 0; reading = 0; sda_pull = 1'b0;
  end
  always @(posedge sda) if (scl) begin
    stops++; active = 0; sda_pull = 1'b0;
  end

  always @(posedge scl) if (active) begin
    if (bitn < 8) begin
      sh = {sh[6:0], sda};
    end else if (reading && sda) begin
      active = 0;               // master NACK: read ends
    end
    bitn++;
  end

  // bitn counts the bits clocked in the current 9-bit slot.
  always @(negedge scl) if (active) begin
    if (bitn == 8) begin
      // acknowledge slot
      if (first) begin
        addressed = (sh[7:1] == ADDR);
        reading   = sh[0];
        rd_idx    = -1;
        sda_pull  = addressed;
        if (!addressed) active = 0;
      end else if (!reading) begin
        bytes_written[n_written % 16] = sh;
        n_written++;
        sda_pull = 1'b1;
      end else begin
        sda_pull = 1'b0;        // the master drives the acknowledge
      end
    end else if (bitn == 9) begin
      bitn  = 0;
      first = 0;
      if (reading) begin
        rd_idx++;
        sda_pull = !read_bytes[rd_idx % 4][7];
      end else begin
        sda_pull = 1'b0;
      end
    end else if (reading && !first && bitn > 0) begin
      sda_pull = !read_bytes[rd_idx % 4][7 - bitn];
    end else begin
      sda_pull = 1'b0;
    end
  end
endmodule
