// Testbench of one DRAM hub: four random sources (random valid, data held
// until accepted) and a randomly ready sink. Every message must come out
// exactly once, in order per source; the hub must forward one message per
// cycle when all sources are busy and the sink is always ready, and a busy
// source must never wait more than four grants (round-robin fairness).
module tb_dram_hub;
  import mrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [3:0] in_valid = '0, in_ready;
  log_msg_t [3:0] in_msg = '0;
  logic out_valid, out_ready = 1'b0;
  log_msg_t out_msg;
  dram_hub dut (.*);

  int checks = 0, failures = 0;
  int sent [4] = '{0, 0, 0, 0}, recv [4] = '{0, 0, 0, 0}, wait_c [4] = '{0, 0, 0, 0};
  int mode = 0, outs = 0, cyc = 0;
  logic [3:0] acc = '0;
  // message: addr = {source, sequence}, lbl/cnt random but nonzero count
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int i = 0; i < 4; i++) begin
      acc[i] = in_valid[i] && in_ready[i];
      if (acc[i]) begin sent[i]++; wait_c[i] = 0; end
      else if (in_valid[i] && out_ready) wait_c[i]++;
      if (wait_c[i] > 4) begin failures++; wait_c[i] = 0; $display("FAIL: source %0d starved", i); end
    end
    if (out_valid && out_ready) begin
      int s, q;
      s = int'(out_msg.addr[19:18]); q = int'(out_msg.addr[17:0]);
      checks++;
      if (q != recv[s]) begin failures++; $display("FAIL: source %0d got seq %0d exp %0d", s, q, recv[s]); end
      recv[s]++; outs++;
    end
  end
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < 4; i++) begin
      if (!in_valid[i] || acc[i]) begin   // previous one accepted at the last edge
        in_valid[i] <= (mode == 1) ? 1'b1 : ($urandom_range(0, 1) == 1);
        in_msg[i]   <= '{addr: {2'(i), 18'(sent[i])}, lbl: 6'($urandom), cnt: 6'($urandom_range(1, 63))};
      end
    end
    out_ready <= (mode == 1) ? 1'b1 : ($urandom_range(0, 2) != 0);
  end
  initial begin
    fork begin repeat (200000) @(posedge clk); $display("FAIL: watchdog"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (2) @(negedge clk); rst_n = 1'b1;
    repeat (5000) @(posedge clk);
    mode = 1;
    repeat (20) @(posedge clk);
    begin
      int o0;
      o0 = outs;
      repeat (100) @(posedge clk);
      checks++;
      if (outs - o0 != 100) begin failures++; $display("FAIL: throughput %0d/100", outs - o0); end
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (recv[i] < sent[i] - 1 || recv[i] > sent[i]) begin failures++; $display("FAIL: source %0d sent %0d recv %0d", i, sent[i], recv[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
