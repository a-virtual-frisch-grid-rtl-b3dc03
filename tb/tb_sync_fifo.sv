// tb_sync_fifo -- self-checking test of the synchronous FIFO.
//
// Random writes and reads against a queue model, at a depth of 16 so that
// full and empty are reached often. Checks data order, level, wr_ready at
// full, rd_valid at empty and the overflow pulse when a write is offered to
// a full buffer.
module tb_sync_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_valid = 1'b0, rd_ready = 1'b0;
  logic [31:0] wr_data = '0;
  logic wr_ready, rd_valid, overflow;
  logic [31:0] rd_data;
  logic [4:0] level;
  int checks = 0, failures = 0, fulls = 0, ovf = 0;
  logic [31:0] q [$];

  sync_fifo #(.WIDTH(32), .DEPTH(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit was_full;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks += 3;
      if (level != 5'(q.size())) begin failures++; $display("FAIL level %0d vs %0d", level, q.size()); end
      if (wr_ready != (q.size() < 16)) begin failures++; $display("FAIL wr_ready"); end
      if (rd_valid != (q.size() > 0)) begin failures++; $display("FAIL rd_valid"); end
      if (rd_valid) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("FAIL data %h vs %h", rd_data, q[0]); end
      end
      if (q.size() == 16) fulls++;
      was_full = (q.size() == 16);
      wr_valid = ($urandom_range(0, 99) < ((i / 500) % 2 ? 30 : 70));
      rd_ready = ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 30));
      wr_data  = $urandom;
      @(posedge clk);
      if (rd_valid && rd_ready) void'(q.pop_front());
      if (wr_valid && wr_ready) q.push_back(wr_data);
      #1;
      if (was_full && wr_valid) begin
        checks++;
        ovf++;
        if (!overflow) begin failures++; $display("FAIL no overflow pulse"); end
      end
    end
    checks++;
    if (fulls == 0 || ovf == 0) begin failures++; $display("FAIL full never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
