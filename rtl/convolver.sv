// convolver -- point-by-point FIR convolution with a programmable window,
// for one channel.
//
// Each new sample has the DC estimate subtracted and is pushed into a
// constant-length buffer of LEN samples while the oldest one falls out. On
// every new sample the block computes y[n] = sum_{i=0}^{LEN-1} c[i] * d[n-i],
// where d = x - dc and c[0] weights the newest sample. The LEN coefficients
// form the window; each channel has its own set, written one tap at a time
// through coef_we/coef_addr/coef_data, so anode and pad channels can use
// different window shapes. After reset every coefficient is 1, a
// rectangular window, which turns the step-like anode pulse into a
// flat-topped pulse whose height is proportional to the deposited charge.
//
// Timing: the buffer updates on the clock edge that takes in_valid; the
// registered sum appears with out_valid two clocks after in_valid. A
// coefficient write takes effect for the next sum. One result per input
// sample; inputs may arrive every clock.
//
// The 32-sample window, the constant-length buffer and the per-channel
// selectable window follow the paper. The subtraction of the DC estimate at
// the buffer input follows the block diagram (DC estimation feeds the
// convolution). Coefficient width, reset window and the fully parallel
// multiply-add are own choices.
module convolver
  import czt_pkg::*;
#(
  parameter int W     = SAMPLE_W,
  parameter int CW    = COEF_W,
  parameter int LEN   = CONV_LEN,
  parameter int OUT_W = CONV_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [W-1:0]       in_data,
  input  logic signed [W-1:0]       dc,
  input  logic                      coef_we,
  input  logic [$clog2(LEN)-1:0]    coef_addr,
  input  logic signed [CW-1:0]      coef_data,
  output logic                      out_valid,
  output logic signed [OUT_W-1:0]   out_data
);

  localparam int DW = W + 1;

  logic signed [DW-1:0] buffer [LEN];
  logic signed [CW-1:0] coef   [LEN];
  logic                 valid_d;
  logic signed [OUT_W-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LEN; i++) begin
        buffer[i] <= '0;
        coef[i]   <= CW'(1);
      end
      valid_d   <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (coef_we) coef[coef_addr] <= coef_data;
      if (in_valid) begin
        buffer[0] <= DW'(in_data) - DW'(dc);
        for (int i = 1; i < LEN; i++) buffer[i] <= buffer[i-1];
      end
      valid_d   <= in_valid;
      out_valid <= valid_d;
      if (valid_d) out_data <= acc;
    end
  end

  always_comb begin
    acc = '0;
    for (int i = 0; i < LEN; i++) acc += OUT_W'(buffer[i]) * OUT_W'(coef[i]);
  end

endmodule
