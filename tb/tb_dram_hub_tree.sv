// Testbench of the DRAM hub network (two levels, 16 sources). Random sources
// and a randomly ready sink: every message must arrive exactly once and in
// order per source. With the network empty, a single message must reach the
// output after LEVELS cycles (one register per hub level).
module tb_dram_hub_tree;
  import mrf_pkg::*;
  localparam int LEVELS = 2, N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [N-1:0] in_valid = '0, in_ready;
  log_msg_t [N-1:0] in_msg = '0;
  logic out_valid, out_ready = 1'b0;
  log_msg_t out_msg;
  dram_hub_tree #(.LEVELS(LEVELS)) dut (.*);

  int checks = 0, failures = 0;
  int sent [N], recv [N];
  logic [N-1:0] acc = '0;
  int mode = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      acc[i] = in_valid[i] && in_ready[i];
      if (acc[i]) sent[i]++;
    end
    if (out_valid && out_ready) begin
      int s, q;
      s = int'(out_msg.addr[19:16]); q = int'(out_msg.addr[15:0]);
      checks++;
      if (q != recv[s]) begin failures++; $display("FAIL: source %0d got seq %0d exp %0d", s, q, recv[s]); end
      recv[s]++;
    end
  end
  always @(negedge clk) if (rst_n && mode == 0) begin
    for (int i = 0; i < N; i++)
      if (!in_valid[i] || acc[i]) begin
        in_valid[i] <= ($urandom_range(0, 3) == 0);
        in_msg[i]   <= '{addr: {4'(i), 16'(sent[i])}, lbl: 6'($urandom), cnt: 6'($urandom_range(1, 63))};
      end
    out_ready <= ($urandom_range(0, 3) != 0);
  end
  initial begin
    foreach (sent[i]) begin sent[i] = 0; recv[i] = 0; end
    fork begin repeat (200000) @(posedge clk); $display("FAIL: watchdog"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (2) @(negedge clk); rst_n = 1'b1;
    repeat (20000) @(posedge clk);
    @(negedge clk); mode = 1;
    for (int i = 0; i < N; i++) if (in_valid[i] && !acc[i]) ; // let pending ones drain
    out_ready = 1'b1;
    repeat (3) @(negedge clk);
    in_valid = '0;
    repeat (50) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (recv[i] != sent[i]) begin failures++; $display("FAIL: source %0d sent %0d recv %0d", i, sent[i], recv[i]); end
    end
    // latency of one message through an empty network
    begin
      int t;
      in_valid[9] = 1'b1; in_msg[9] = '{addr: {4'd9, 16'(sent[9])}, lbl: 6'd1, cnt: 6'd1};
      @(negedge clk); in_valid[9] = 1'b0;
      t = 1;
      while (!out_valid && t < 20) begin @(negedge clk); t++; end
      checks++;
      if (t != LEVELS) begin failures++; $display("FAIL: latency %0d, expected %0d", t, LEVELS); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
