// Testbench of the DRAM interface: random message stream, randomly ready DRAM.
// Every accepted line must hold the next 16 messages in order (message j in
// bits 32j..32j+31) and be written at the next line address; the log index
// must count written lines. A flush after 37 messages must write the partial
// third line padded with zero messages and then pulse flush_done; a flush with
// nothing pending must pulse flush_done without writing.
module tb_dram_if;
  import mrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, in_ready, flush = 1'b0, flush_done, dram_valid, dram_ready = 1'b0;
  log_msg_t in_msg = '0;
  logic [31:0] dram_addr, log_index;
  logic [LINE_W-1:0] dram_data;
  dram_if #(.IDX_W(32)) dut (.*);

  int checks = 0, failures = 0, nsent = 0, nrecv = 0, lines = 0, ndone = 0;
  log_msg_t q [$];
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin q.push_back(in_msg); nsent++; end
    if (flush_done) ndone++;
    if (dram_valid && dram_ready) begin
      checks++;
      if (dram_addr != 32'(lines) || log_index != 32'(lines)) begin failures++; $display("FAIL: line address %0d exp %0d", dram_addr, lines); end
      for (int j = 0; j < 16; j++) begin
        log_msg_t m;
        m = dram_data[32*j +: 32];
        checks++;
        if (q.size() > 0) begin
          if (m !== q[0]) begin failures++; $display("FAIL: line %0d slot %0d", lines, j); end
          void'(q.pop_front()); nrecv++;
        end else if (m !== '0) begin failures++; $display("FAIL: pad slot %0d not zero", j); end
      end
      lines++;
    end
  end
  task automatic send(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1'b1; in_msg = '{addr: 20'($urandom), lbl: 6'($urandom), cnt: 6'($urandom_range(1, 63))};
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 1'b0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask
  always @(negedge clk) dram_ready <= ($urandom_range(0, 2) != 0);
  initial begin
    fork begin repeat (100000) @(posedge clk); $display("FAIL: watchdog"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (2) @(negedge clk); rst_n = 1'b1;
    send(37);
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    wait (ndone == 1);
    repeat (3) @(negedge clk);
    checks++;
    if (lines != 3 || nrecv != 37 || q.size() != 0) begin failures++; $display("FAIL: after flush lines=%0d msgs=%0d", lines, nrecv); end
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (ndone != 2 || lines != 3) begin failures++; $display("FAIL: empty flush done=%0d lines=%0d", ndone, lines); end
    send(500);
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    wait (ndone == 3);
    repeat (3) @(negedge clk);
    checks++;
    if (nrecv != 537 || lines != 3 + 32) begin failures++; $display("FAIL: end msgs=%0d lines=%0d", nrecv, lines); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
