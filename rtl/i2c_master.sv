// i2c_master -- I2C bus master state machine with a programmable clock and
// a programmable number of data bytes.
//
// One transaction is: START, address byte {addr, rw}, then 1..4 data bytes,
// then STOP. In a write (rw = 0) the bytes come from wdata, byte 0 in
// wdata[7:0], each acknowledged by the target; a NACK aborts with STOP and
// sets `nack`. In a read (rw = 1) the target drives the bytes, collected in
// rdata (byte 0 in rdata[7:0]); the master acknowledges every byte but the
// last. Bits go out MSB first.
//
// Each bit period is split into four phases of `div` + 1 clocks: SCL low
// with SDA changing, SCL rising, SCL high with SDA sampled at the phase
// start, SCL falling. So f_SCL = f_clk / (4 * (div + 1)). The bus pins are
// open-drain: scl_oe / sda_oe high pull the line low, sda_i reads the line.
// Clock stretching by the target is not supported. start is a one-clock
// request taken only while busy is low; busy stays high until after STOP.
//
// The paper lists an I2C state machine with configurable clock and data
// bytes, used to set up the charge amplifier and the board. Phase scheme,
// byte limit and the lack of clock stretching are own choices.
module i2c_master (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        rw,
  input  logic [1:0]  nbytes_m1,   // number of data bytes minus one
  input  logic [6:0]  addr,
  input  logic [15:0] div,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        busy,
  output logic        nack,
  output logic        scl_oe,
  output logic        sda_oe,
  input  logic        sda_i
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_BIT, S_STOP} state_e;
  state_e state;

  logic [15:0] tick_cnt;
  logic        tick;
  logic [1:0]  phase;
  logic [3:0]  bit_idx;     // 0..7 data bits, 8 = acknowledge
  logic [2:0]  byte_idx;    // 0 = address byte
  logic [7:0]  shreg;
  logic        scl_q, sda_q;
  logic        rw_q;
  logic [1:0]  nb_q;
  logic [31:0] wdata_q;

  assign tick   = (tick_cnt == '0);
  assign busy   = (state != S_IDLE);
  assign scl_oe = !scl_q;
  assign sda_oe = !sda_q;

  // Byte put on the bus after byte `idx`: idx is the byte just finished.
  function automatic logic [7:0] wbyte(input logic [2:0] idx);
    return wdata_q[8*idx[1:0] +: 8];
  endfunction

  logic is_read_data;
  logic last_byte;
  assign is_read_data = rw_q && (byte_idx != 3'd0);
  assign last_byte    = (byte_idx == {1'b0, nb_q} + 3'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      tick_cnt <= '0;
      phase    <= '0;
      bit_idx  <= '0;
      byte_idx <= '0;
      shreg    <= '0;
      scl_q    <= 1'b1;
      sda_q    <= 1'b1;
      rw_q     <= 1'b0;
      nb_q     <= '0;
      wdata_q  <= '0;
      rdata    <= '0;
      nack     <= 1'b0;
    end else begin
      if (state == S_IDLE) begin
        tick_cnt <= '0;
        phase    <= '0;
        if (start) begin
          state    <= S_START;
          rw_q     <= rw;
          nb_q     <= nbytes_m1;
          wdata_q  <= wdata;
          shreg    <= {addr, rw};
          byte_idx <= '0;
          bit_idx  <= '0;
          nack     <= 1'b0;
          tick_cnt <= div;
        end
      end else begin
        tick_cnt <= tick ? div : tick_cnt - 1'b1;
        if (tick) begin
          phase <= phase + 1'b1;
          unique case (state)
            S_START: begin
              unique case (phase)
                2'd0, 2'd1: begin scl_q <= 1'b1; sda_q <= 1'b1; end
                2'd2:       begin scl_q <= 1'b1; sda_q <= 1'b0; end
                default:    begin scl_q <= 1'b0; sda_q <= 1'b0; state <= S_BIT; end
              endcase
            end
            S_BIT: begin
              unique case (phase)
                2'd0: begin
                  scl_q <= 1'b0;
                  if (bit_idx < 4'd8)
                    sda_q <= is_read_data ? 1'b1 : shreg[7];
                  else
                    sda_q <= is_read_data ? last_byte : 1'b1;  // ACK/NACK from master, or release
                end
                2'd1: scl_q <= 1'b1;
                2'd2: begin
                  scl_q <= 1'b1;
                  if (bit_idx < 4'd8) begin
                    shreg <= {shreg[6:0], sda_i};
                  end else if (!is_read_data && sda_i) begin
                    nack <= 1'b1;
                  end
                end
                default: begin
                  scl_q <= 1'b0;
                  if (bit_idx < 4'd8) begin
                    bit_idx <= bit_idx + 1'b1;
                  end else begin
                    bit_idx <= '0;
                    if (is_read_data) rdata[8*2'(byte_idx[1:0] - 2'd1) +: 8] <= shreg;
                    if (nack || last_byte) begin
                      state <= S_STOP;
                    end else begin
                      byte_idx <= byte_idx + 1'b1;
                      shreg    <= wbyte(byte_idx);
                    end
                  end
                end
              endcase
            end
            S_STOP: begin
              unique case (phase)
                2'd0:    begin scl_q <= 1'b0; sda_q <= 1'b0; end
                2'd1:    begin scl_q <= 1'b1; sda_q <= 1'b0; end
                2'd2:    begin scl_q <= 1'b1; sda_q <= 1'b1; end
                default: begin scl_q <= 1'b1; sda_q <= 1'b1; state <= S_IDLE; end
              endcase
            end
            default: state <= S_IDLE;
          endcase
        end
      end
    end
  end

endmodule
