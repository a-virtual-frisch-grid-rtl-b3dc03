// snippet_streamer -- streams one selected signal to the host, either
// continuously or as triggered snippets.
//
// Continuous mode: every input sample is offered on the output at once; a
// sample the output cannot take is dropped and counted in `lost`.
// Snippet mode: samples are written into a ring buffer of DEPTH words. When
// the signal crosses the level upwards (previous sample <= level, present
// sample > level), the block keeps recording `post` more samples, then stops
// recording and sends a header word {8'h5A, 8'h00, 16-bit length} followed
// by the `pre` samples before the crossing, the crossing sample and the
// `post` samples after it, oldest first. Then it re-arms. pre + post is
// limited to DEPTH - 1; samples arriving while a snippet is sent are not
// recorded (dead time).
//
// Interface: in_valid/in_data is the selected signal (the caller picks the
// channel and the processing stage); out_valid/out_ready/out_data is the
// stream; `enable` low stops the stream and returns to idle.
//
// The paper gives the function (continuous raw data and triggered data
// snippets from a dynamically selected single channel). The crossing rule,
// ring buffer, header word and dead time are own choices.
module snippet_streamer #(
  parameter int W     = 32,
  parameter int DEPTH = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  input  logic                 snippet_mode,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_data,
  input  logic signed [W-1:0]  level,
  input  logic [7:0]           pre,
  input  logic [11:0]          post,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [W-1:0]         out_data,
  output logic [31:0]          lost,
  output logic [31:0]          snippets
);

  localparam int AW = $clog2(DEPTH);

  typedef enum logic [1:0] {S_ARM, S_POST, S_HEAD, S_DUMP} state_e;
  state_e state;

  logic [W-1:0]       ring [DEPTH];
  logic [AW-1:0]      wp, rp;
  logic [AW:0]        remain;
  logic [AW:0]        post_left;
  logic [AW:0]        post_eff;
  logic [AW:0]        length;
  logic signed [W-1:0] prev;
  logic               crossing;

  assign post_eff = ((AW+1)'(post) + (AW+1)'(pre) > (AW+1)'(DEPTH - 1))
                    ? (AW+1)'(DEPTH - 1) - (AW+1)'(pre) : (AW+1)'(post);
  assign length   = (AW+1)'(pre) + post_eff + 1'b1;
  assign crossing    = in_valid && (prev <= level) && (in_data > level);

  always_ff @(posedge clk) begin
    if (snippet_mode && in_valid && (state == S_ARM || state == S_POST))
      ring[wp] <= in_data;
  end

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    if (enable) begin
      if (!snippet_mode) begin
        out_valid = in_valid;
        out_data  = in_data;
      end else if (state == S_HEAD) begin
        out_valid = 1'b1;
        out_data  = W'({8'h5A, 8'h00, 16'(length)});
      end else if (state == S_DUMP) begin
        out_valid = 1'b1;
        out_data  = ring[rp];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_ARM;
      wp        <= '0;
      rp        <= '0;
      remain    <= '0;
      post_left <= '0;
      prev      <= '0;
      lost      <= '0;
      snippets  <= '0;
    end else begin
      if (in_valid) prev <= in_data;
      if (!enable || !snippet_mode) begin
        state <= S_ARM;
        if (enable && in_valid && !out_ready) lost <= lost + 1'b1;
      end else begin
        unique case (state)
          S_ARM: if (in_valid) begin
            wp <= wp + 1'b1;
            if (crossing) begin
              rp <= wp - AW'(pre);
              if (post_eff == '0) state <= S_HEAD;
              else begin
                post_left <= post_eff;
                state     <= S_POST;
              end
            end
          end
          S_POST: if (in_valid) begin
            wp        <= wp + 1'b1;
            post_left <= post_left - 1'b1;
            if (post_left == (AW+1)'(1)) state <= S_HEAD;
          end
          S_HEAD: if (out_ready) begin
            remain <= length;
            state  <= S_DUMP;
          end
          S_DUMP: if (out_ready) begin
            rp     <= rp + 1'b1;
            remain <= remain - 1'b1;
            if (remain == (AW+1)'(1)) begin
              state    <= S_ARM;
              snippets <= snippets + 1'b1;
            end
          end
          default: state <= S_ARM;
        endcase
      end
    end
  end

endmodule
