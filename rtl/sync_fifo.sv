// sync_fifo -- single-clock first-in first-out buffer.
//
// A circular buffer of DEPTH words (DEPTH a power of two) with read and
// write pointers one bit wider than the address, so full and empty are told
// apart by the extra bit. Both sides use valid/ready: a word is written when
// wr_valid && wr_ready and read when rd_valid && rd_ready. The read side is
// first-word-fall-through: rd_data shows the oldest word whenever rd_valid
// is high. A write and a read may happen on the same clock. level is the
// number of stored words. overflow pulses when a write is offered while the
// buffer is full (the word is refused, the writer must hold it).
//
// The design uses it as the buffered DMA FIFO that carries event words to
// the host and as the buffer of the single-channel stream. The paper only
// names a buffered DMA FIFO; depth and handshake are own choices.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_valid,
  output logic                     wr_ready,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic [WIDTH-1:0]         rd_data,
  output logic [$clog2(DEPTH):0]   level,
  output logic                     overflow
);

  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_wr, do_rd;

  assign level    = wptr - rptr;
  assign wr_ready = (level != (AW+1)'(DEPTH));
  assign rd_valid = (wptr != rptr);
  assign rd_data  = mem[rptr[AW-1:0]];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      overflow <= wr_valid && !wr_ready;
    end
  end

  // A word is never taken from an empty buffer nor written into a full one.
  assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));

endmodule
