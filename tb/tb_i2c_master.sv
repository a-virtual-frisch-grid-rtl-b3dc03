// tb_i2c_master -- self-checking test of the I2C master against a
// behavioural target.
//
// Runs writes of 1 to 4 bytes and reads of 1 to 4 bytes to the target at
// its address, and a write to a wrong address that must end with `nack`.
// Checks the bytes the target stored, the bytes read back, START/STOP
// counts, and the SCL period: with div = 3 one bit takes 4*(3+1) = 16
// clocks, so a transaction of b data bytes lasts close to 9*(b+1)*16 clocks
// plus START and STOP.
module tb_i2c_master;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, rw = 1'b0;
  logic [1:0] nbytes_m1 = '0;
  logic [6:0] addr = 7'h2A;
  logic [15:0] div = 16'd3;
  logic [31:0] wdata = '0, rdata;
  logic busy, nack, scl_oe, sda_oe;
  logic sda_pull;
  wire  scl = !scl_oe;
  wire  sda = !(sda_oe || sda_pull);
  logic sda_i;
  assign sda_i = sda;
  int checks = 0, failures = 0;
  int scl_rises = 0;

  i2c_master dut (.*);
  i2c_target_model #(.ADDR(7'h2A)) target (.scl, .sda, .sda_pull);

  always #5 clk = ~clk;
  always @(posedge scl) scl_rises++;

  initial begin
    #20000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xfer(input bit r, input int nb, input logic [6:0] a, input logic [31:0] d, output int cycles);
    @(negedge clk);
    rw = r; nbytes_m1 = 2'(nb - 1); addr = a; wdata = d; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc, nw0, rises0;
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    target.starts = 0;
    target.stops = 0;
    for (int nb = 1; nb <= 4; nb++) begin
      d = $urandom;
      nw0 = target.n_written;
      rises0 = scl_rises;
      xfer(0, nb, 7'h2A, d, cyc);
      checks += 4;
      if (nack) begin failures++; $display("FAIL unexpected nack"); end
      if (target.n_written - nw0 != nb) begin failures++; $display("FAIL wrote %0d bytes, exp %0d", target.n_written - nw0, nb); end
      for (int b = 0; b < nb; b++) begin
        checks++;
        if (target.bytes_written[(nw0 + b) % 16] != d[8*b +: 8]) begin failures++; $display("FAIL byte %0d: %h exp %h", b, target.bytes_written[(nw0 + b) % 16], d[8*b +: 8]); end
      end
      if (scl_rises - rises0 != 9 * (nb + 1) + 1) begin failures++; $display("FAIL %0d SCL pulses", scl_rises - rises0); end
      if (cyc < 16 * 9 * (nb + 1) || cyc > 16 * 9 * (nb + 1) + 16 * 3) begin failures++; $display("FAIL duration %0d clocks for %0d bytes", cyc, nb); end
    end
    for (int nb = 1; nb <= 4; nb++) begin
      xfer(1, nb, 7'h2A, 32'h0, cyc);
      checks++;
      if (nack) begin failures++; $display("FAIL nack on read"); end
      for (int b = 0; b < nb; b++) begin
        checks++;
        if (rdata[8*b +: 8] != target.read_bytes[b]) begin failures++; $display("FAIL read byte %0d: %h exp %h", b, rdata[8*b +: 8], target.read_bytes[b]); end
      end
    end
    // wrong address: not acknowledged
    nw0 = target.n_written;
    xfer(0, 2, 7'h11, 32'hFFFF, cyc);
    checks += 2;
    if (!nack) begin failures++; $display("FAIL no nack for absent target"); end
    if (target.n_written != nw0) begin failures++; $display("FAIL absent target stored data"); end
    // slower clock: div = 9, one byte: 9*2*40 clocks
    div = 16'd9;
    xfer(0, 1, 7'h2A, 32'h5A, cyc);
    checks++;
    if (cyc < 40 * 18 || cyc > 40 * 21) begin failures++; $display("FAIL duration %0d at div 9", cyc); end
    checks += 2;
    if (target.starts != 10) begin failures++; $display("FAIL starts=%0d", target.starts); end
    if (target.stops != 10) begin failures++; $display("FAIL stops=%0d", target.stops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
