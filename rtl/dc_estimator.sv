// dc_estimator -- baseline (DC offset) estimation with pulse and burst
// rejection, for one channel.
//
// The block keeps exponential running averages of the signal mean and of its
// variance: mean += (x - mean) / 2^k and var += ((x - mean)^2 - var) / 2^k,
// both held with FRAC fractional bits. A sample whose squared deviation
// exceeds var * 2^thr_shift (and a small absolute floor) is treated as part
// of a pulse or a noise burst: the averages are frozen for that sample and
// for the following `holdoff` samples, so pulses do not pull the baseline.
// During the first 1024 samples after reset, the first 16 * 2^k samples after
// the block is switched on, and after 1024 consecutive frozen samples, every sample is
// accepted so the estimate can acquire a new baseline.
//
// Interface: in_valid/in_data are the decimated samples. dc is the current
// integer baseline (before the present sample is folded in), forced to zero
// when `enable` is low, which switches DC removal off. variance is the
// integer variance estimate, hold is high during the hold-off after an
// outlier. All outputs come from registers and change one clock after an
// in_valid strobe (dc also follows `enable` directly).
//
// The paper gives the function (monitor mean and variance, detect noise
// bursts and pulses, on/off switch). The exponential averages, the threshold
// rule, the hold-off and the reacquisition rule are own choices.
module dc_estimator
  import czt_pkg::*;
#(
  parameter int W    = SAMPLE_W,
  parameter int FRAC = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  input  logic [3:0]          k,          // averaging shift
  input  logic [3:0]          thr_shift,  // outlier threshold: var * 2^thr_shift
  input  logic [7:0]          holdoff,    // samples frozen after an outlier
  output logic signed [W-1:0] dc,
  output logic [2*W+1:0]      variance,
  output logic                hold
);

  localparam int MW   = W + FRAC + 1;      // mean, fixed point
  localparam int D2W  = 2*W + 2;           // squared deviation
  localparam int CMPW = D2W + 16;
  localparam logic [D2W-1:0] DEV2_FLOOR = D2W'(16);

  logic signed [MW-1:0]  mean_fx;
  logic [D2W+FRAC-1:0]   var_q;      // variance, FRAC fractional bits
  logic [7:0]            hold_cnt;
  logic [19:0]           settle_cnt;
  logic [9:0]            frozen_run;
  logic                  enable_q;

  logic signed [MW:0]    dev_fx;
  logic signed [W+1:0]   dev_int;
  logic [D2W-1:0]        dev2;
  logic [CMPW-1:0]       limit;
  logic                  outlier;
  logic                  settling;
  logic signed [D2W+FRAC:0] var_diff;

  assign dev_fx   = (MW+1)'(in_data) * (MW+1)'(2**FRAC) - (MW+1)'(mean_fx);
  assign dev_int  = (W+2)'(dev_fx >>> FRAC);
  assign dev2     = D2W'(dev_int * dev_int);
  assign limit    = CMPW'(var_q >> FRAC) << thr_shift;
  assign outlier  = (CMPW'(dev2) > limit) && (dev2 > DEV2_FLOOR);
  assign settling = (settle_cnt != '0);
  assign var_diff = $signed({1'b0, dev2, FRAC'(0)}) - $signed({1'b0, var_q});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mean_fx    <= '0;
      var_q      <= '0;
      hold_cnt   <= '0;
      settle_cnt <= 20'd1024;
      frozen_run <= '0;
      enable_q   <= 1'b0;
    end else begin
      enable_q <= enable;
      if (enable && !enable_q) begin
        settle_cnt <= 20'(16) << k;
      end else if (in_valid) begin
        if (settle_cnt != '0) settle_cnt <= settle_cnt - 1'b1;
        if (settling || (!outlier && hold_cnt == '0)) begin
          mean_fx    <= mean_fx + MW'(dev_fx >>> k);
          var_q      <= (D2W+FRAC)'($signed({1'b0, var_q}) + (var_diff >>> k));
          frozen_run <= '0;
        end else begin
          frozen_run <= frozen_run + 1'b1;
          if (frozen_run == '1) settle_cnt <= 20'(16) << k;
        end
        if (settling)          hold_cnt <= '0;
        else if (outlier)      hold_cnt <= holdoff;
        else if (hold_cnt != 0) hold_cnt <= hold_cnt - 1'b1;
      end
    end
  end

  assign dc       = enable ? W'(mean_fx >>> FRAC) : '0;
  assign variance = D2W'(var_q >> FRAC);
  assign hold     = (hold_cnt != '0);

endmodule
