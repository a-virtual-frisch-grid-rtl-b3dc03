// crystal_trigger -- anode peak/valley detection and pad-value latching for
// one CZT bar.
//
// Works on the convolved signals of the bar's anode and its four side pads.
// The anode is first sign-corrected (negated in valley mode, for negative
// pulses). When it rises above the trigger level the block arms, records the
// noise value N (the anode sample `noise_back`+1 samples before the trigger
// crossing, taken from a 32-sample history) and tracks the maximum. The
// first sample that does not exceed the running maximum ends the search:
// the maximum is the peak amplitude A and its clock count the timestamp.
// The four pad values are then latched `pad_delay` samples later (0 latches
// them on the sample that ended the search), which lets the pad sampling
// point be tuned for position reconstruction. The block then waits for the
// anode to fall back to the trigger level before it re-arms.
//
// Interface: all five signals share in_valid (channels run in lock-step).
// The finished event sits in a one-entry slot, ev_valid/ev_ready handshake;
// an event finished while the slot is still full is lost and pulses `drop`.
// `run` low holds the block idle. Timing: the event appears the clock after
// the in_valid on which the pads were latched.
//
// The paper gives the function: peak/valley detection on the anode, an
// adjustable pad-latch delay, and a noise value N acquired with each peak.
// The arming rule, the first-decrease peak rule, the history depth and the
// slot with drop counting are own choices.
module crystal_trigger
  import czt_pkg::*;
#(
  parameter int HIST = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   run,
  input  logic [CRY_W-1:0]       crystal_id,
  input  logic [31:0]            timestamp,
  input  logic                   in_valid,
  input  conv_t                  anode,
  input  conv_t [N_PADS-1:0]     pads,
  input  logic [30:0]            trig_level,
  input  logic                   valley,
  input  logic [7:0]             pad_delay,
  input  logic [$clog2(HIST)-1:0] noise_back,
  output event_t                 ev,
  output logic                   ev_valid,
  input  logic                   ev_ready,
  output logic                   drop,
  output logic                   armed
);

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_DELAY, S_WAIT_LOW} state_e;
  state_e state;

  conv_t       a;
  conv_t       hist [HIST];
  conv_t       peak_q;
  conv_t       noise_q;
  logic [31:0] t_peak;
  logic [7:0]  dly_cnt;
  logic        above;
  logic        latch_now;

  assign a     = valley ? -anode : anode;
  assign above = (a > $signed({1'b0, trig_level}));
  assign latch_now = in_valid && (
                       (state == S_SEARCH && a <= peak_q && pad_delay == '0) ||
                       (state == S_DELAY  && dly_cnt == 8'd1));
  assign armed = (state == S_SEARCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      for (int i = 0; i < HIST; i++) hist[i] <= '0;
      peak_q   <= '0;
      noise_q  <= '0;
      t_peak   <= '0;
      dly_cnt  <= '0;
      ev       <= '0;
      ev_valid <= 1'b0;
      drop     <= 1'b0;
    end else begin
      drop <= 1'b0;
      if (ev_valid && ev_ready) ev_valid <= 1'b0;
      if (in_valid) begin
        hist[0] <= a;
        for (int i = 1; i < HIST; i++) hist[i] <= hist[i-1];
      end
      if (!run) begin
        state <= S_IDLE;
      end else if (in_valid) begin
        unique case (state)
          S_IDLE: if (above) begin
            state   <= S_SEARCH;
            peak_q  <= a;
            t_peak  <= timestamp;
            noise_q <= hist[noise_back];
          end
          S_SEARCH: begin
            if (a > peak_q) begin
              peak_q <= a;
              t_peak <= timestamp;
            end else if (pad_delay == '0) begin
              state <= S_WAIT_LOW;
            end else begin
              state   <= S_DELAY;
              dly_cnt <= pad_delay;
            end
          end
          S_DELAY: begin
            dly_cnt <= dly_cnt - 1'b1;
            if (dly_cnt == 8'd1) state <= S_WAIT_LOW;
          end
          S_WAIT_LOW: if (!above) state <= S_IDLE;
          default: state <= S_IDLE;
        endcase
      end
      if (run && latch_now) begin
        if (ev_valid && !ev_ready) begin
          drop <= 1'b1;
        end else begin
          ev_valid     <= 1'b1;
          ev.crystal   <= crystal_id;
          ev.timestamp <= t_peak;
          ev.anode     <= peak_q;
          ev.noise     <= noise_q;
          ev.pad       <= pads;
        end
      end
    end
  end

  // A waiting event is held, unchanged, until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   ev_valid && !ev_ready |=> ev_valid && $stable(ev));

endmodule
