// tb_event_packer -- self-checking test of event arbitration and record
// packing.
//
// Nine sources raise random events at random times and hold each until it
// is accepted. The output is drained with a random ready. Every 8-word
// record is decoded and compared with the oldest outstanding event of the
// bar it names; sequence numbers must count up by one. A burst with all
// nine sources pending at once must be served in round-robin order 0..8.
module tb_event_packer;
  import czt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  event_t [8:0] ev;
  logic [8:0] ev_valid = '0, ev_ready;
  logic out_valid, out_ready = 1'b0;
  logic [31:0] out_data, ev_count;
  int checks = 0, failures = 0;
  event_t sent [9][$];
  logic [31:0] words [$];
  int order [$];
  int records = 0;
  int exp_seq = 0;

  event_packer dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic event_t rnd_event(int c);
    event_t e;
    e.crystal = 4'(c);
    e.timestamp = $urandom;
    e.anode = $urandom;
    e.noise = $urandom;
    for (int p = 0; p < 4; p++) e.pad[p] = $urandom;
    return e;
  endfunction

  // Sources and sink. Handshakes are sampled just before the rising edge,
  // outputs of the testbench change after the falling edge.
  bit burst = 0, stop_src = 0;
  always begin
    logic [8:0] taken;
    logic       got;
    logic [31:0] w;
    @(negedge clk);
    if (rst_n && !stop_src) begin
      for (int c = 0; c < 9; c++) begin
        if (!ev_valid[c] && (burst || $urandom_range(0, 99) < 3)) begin
          ev[c] = rnd_event(c);
          ev_valid[c] = 1'b1;
          sent[c].push_back(ev[c]);
        end
      end
    end
    out_ready = ($urandom_range(0, 99) < 60);
    #4;
    taken = ev_valid & ev_ready;
    got = out_valid && out_ready;
    w = out_data;
    checks++;
    if (!$onehot0(ev_ready)) begin failures++; $display("FAIL several grants"); end
    @(posedge clk);
    #1;
    for (int c = 0; c < 9; c++) if (taken[c]) begin
      ev_valid[c] = 1'b0;
      order.push_back(c);
    end
    if (got) begin
      words.push_back(w);
      if (words.size() == 8) check_record();
    end
  end

  task automatic check_record();
    int c;
    event_t e;
    c = int'(words[0][19:16]);
    checks += 3;
    if (words[0][31:24] != 8'hE5) begin failures++; $display("FAIL header %h", words[0]); end
    if (words[0][15:0] != 16'(exp_seq)) begin failures++; $display("FAIL seq %0d exp %0d", words[0][15:0], exp_seq); end
    exp_seq++;
    if (sent[c].size() == 0) begin failures++; $display("FAIL record of bar %0d not sent", c); end
    else begin
      e = sent[c].pop_front();
      checks++;
      if (words[1] != e.timestamp || words[2] != e.anode || words[3] != e.pad[0] ||
          words[4] != e.pad[1] || words[5] != e.pad[2] || words[6] != e.pad[3] || words[7] != e.noise) begin
        failures++; $display("FAIL record contents of bar %0d", c);
      end
    end
    words.delete();
    records++;
  endtask


  initial begin
    repeat (3) @(negedge clk);
    // burst first: everything pending together right after reset
    burst = 1;
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    burst = 0;
    wait (order.size() >= 9);
    checks++;
    for (int i = 0; i < 9; i++)
      if (order[i] != i) begin failures++; $display("FAIL round robin order at %0d: %0d", i, order[i]); break; end
    repeat (20000) @(negedge clk);
    stop_src = 1;
    wait (ev_valid == '0);
    repeat (400) @(negedge clk);
    for (int c = 0; c < 9; c++) begin
      checks++;
      if (sent[c].size() != 0) begin failures++; $display("FAIL bar %0d has %0d events never packed", c, sent[c].size()); end
    end
    checks += 2;
    if (records < 100) begin failures++; $display("FAIL only %0d records", records); end
    if (ev_count != 32'(records)) begin failures++; $display("FAIL ev_count %0d vs %0d", ev_count, records); end
    $display("records=%0d", records);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
