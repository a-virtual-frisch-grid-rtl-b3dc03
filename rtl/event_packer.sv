// event_packer -- collects events from all bars and writes them into the
// DMA FIFO as fixed-length records of 32-bit words.
//
// A round-robin arbiter picks the next bar with a pending event, starting
// after the bar served last, and accepts that event (ev_ready for one
// clock). The event is then written as EVENT_WORDS words:
//   word 0: {8'hE5, 4'h0, bar index, 16-bit sequence number}
//   word 1: timestamp of the anode peak (clock count)
//   word 2: anode amplitude A
//   words 3..6: pad values P1..P4
//   word 7: noise value N
// one word per clock while the FIFO accepts (out_valid/out_ready); a full
// FIFO stalls the packer, which in turn leaves the bars' event slots full.
// ev_count counts complete records.
//
// The paper gives the content of a transfer (the anode peak amplitude and
// the four pad values; a noise value N is acquired with each peak; events
// are logged with a timestamp). Record layout, header, sequence number and
// arbitration are own choices.
module event_packer
  import czt_pkg::*;
#(
  parameter int N_SRC = N_CRYSTALS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  event_t [N_SRC-1:0]   ev,
  input  logic   [N_SRC-1:0]   ev_valid,
  output logic   [N_SRC-1:0]   ev_ready,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [31:0]          out_data,
  output logic [31:0]          ev_count
);

  localparam int SW = $clog2(N_SRC);
  localparam int WW = $clog2(EVENT_WORDS);

  logic [SW-1:0]  last;       // bar served last
  logic           busy;
  logic [WW-1:0]  word_idx;
  event_t         cur;
  logic [15:0]    seq;
  logic           grant_ok;
  logic [SW-1:0]  grant;

  // Round-robin choice: first requester after `last`.
  always_comb begin
    grant_ok = 1'b0;
    grant    = '0;
    for (int k = 1; k <= N_SRC; k++) begin
      int idx;
      idx = (int'(last) + k) % N_SRC;
      if (!grant_ok && ev_valid[idx]) begin
        grant_ok = 1'b1;
        grant    = SW'(idx);
      end
    end
  end

  always_comb begin
    ev_ready = '0;
    if (!busy && grant_ok) ev_ready[grant] = 1'b1;
  end

  always_comb begin
    unique case (word_idx)
      3'd0: out_data = {EVENT_MARK, 4'h0, cur.crystal, seq};
      3'd1: out_data = cur.timestamp;
      3'd2: out_data = cur.anode;
      3'd3: out_data = cur.pad[0];
      3'd4: out_data = cur.pad[1];
      3'd5: out_data = cur.pad[2];
      3'd6: out_data = cur.pad[3];
      default: out_data = cur.noise;
    endcase
  end
  assign out_valid = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last     <= SW'(N_SRC - 1);
      busy     <= 1'b0;
      word_idx <= '0;
      cur      <= '0;
      seq      <= '0;
      ev_count <= '0;
    end else if (!busy) begin
      if (grant_ok) begin
        cur      <= ev[grant];
        last     <= grant;
        busy     <= 1'b1;
        word_idx <= '0;
      end
    end else if (out_ready) begin
      if (word_idx == WW'(EVENT_WORDS - 1)) begin
        busy     <= 1'b0;
        seq      <= seq + 1'b1;
        ev_count <= ev_count + 1'b1;
      end else begin
        word_idx <= word_idx + 1'b1;
      end
    end
  end

  // Handshake rules: a word offered and not taken stays offered, unchanged;
  // at most one bar is served at a time.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));
  assert property (@(posedge clk) disable iff (!rst_n)
                   (ev_ready & (ev_ready - 1'b1)) == '0);

endmodule
