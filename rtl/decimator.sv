// decimator -- integrate-and-dump decimation filter for one channel.
//
// The block sums n consecutive input samples (a boxcar integrator, which
// acts as a low-pass filter against high-frequency noise) and emits the sum
// once every n inputs, so the output rate is the input rate divided by n.
// Before output, a programmable number of LSBs is dropped (arithmetic shift
// right) and the result is saturated to SAMPLE_W bits, so that the later
// stages keep a chosen resolution at low logic cost.
//
// Interface: in_valid/in_data carry one ADC word per strobe. n is the
// integration window (0 is treated as 1), lsb_drop the shift. out_valid is a
// one-cycle strobe, registered: it rises the clock after the n-th input of a
// window. Changing n takes effect at the next window boundary after the
// counter wraps. Reset clears the accumulator and the counter.
//
// The paper gives the function (integration over a programmable window, LSB
// removal). Integrate-and-dump, saturation and the widths are own choices.
module decimator
  import czt_pkg::*;
#(
  parameter int IN_W  = ADC_BITS,
  parameter int OUT_W = SAMPLE_W,
  parameter int N_W   = DECIM_MAX_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  input  logic [N_W-1:0]          n,
  input  logic [3:0]              lsb_drop,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);

  localparam int ACC_W = IN_W + N_W;

  logic signed [ACC_W-1:0] acc;
  logic [N_W-1:0]          cnt;
  logic [N_W-1:0]          n_eff;
  logic signed [ACC_W-1:0] sum_now;
  logic signed [ACC_W-1:0] shifted;

  assign n_eff   = (n == '0) ? N_W'(1) : n;
  assign sum_now = acc + ACC_W'(in_data);
  assign shifted = sum_now >>> lsb_drop;

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 <<< (OUT_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 <<< (OUT_W-1));

  function automatic logic signed [OUT_W-1:0] sat(input logic signed [ACC_W-1:0] v);
    if (v > MAXV)      return OUT_W'(MAXV);
    else if (v < MINV) return OUT_W'(MINV);
    else               return OUT_W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt + 1'b1 >= n_eff) begin
          cnt       <= '0;
          acc       <= '0;
          out_valid <= 1'b1;
          out_data  <= sat(shifted);
        end else begin
          cnt <= cnt + 1'b1;
          acc <= sum_now;
        end
      end
    end
  end

endmodule
