// Testbench of the singleton 1 memory: random writes and reads against a
// reference array; checks one-cycle read latency, that a read port value holds
// when no read is issued, and that a write wins over a simultaneous read.
module tb_s1mem;
  localparam int RVS = 1024;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [9:0] rd_addr = '0, wr_addr = '0;
  logic [5:0] wr_data = '0, rd_data;
  s1mem #(.RVS(RVS)) dut (.*);

  int checks = 0, failures = 0;
  logic [5:0] ref_m [RVS];
  initial begin
    fork begin repeat (100000) @(posedge clk); $display("FAIL: watchdog"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    // fill every word
    for (int a = 0; a < RVS; a++) begin
      @(negedge clk); wr_en = 1'b1; wr_addr = 10'(a); wr_data = 6'($urandom); ref_m[a] = wr_data;
    end
    @(negedge clk); wr_en = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      int a;
      logic [5:0] held;
      a = $urandom_range(0, RVS - 1);
      @(negedge clk); rd_en = 1'b1; rd_addr = 10'(a);
      wr_en = ($urandom_range(0, 3) == 0); wr_addr = 10'($urandom); wr_data = 6'($urandom);
      @(negedge clk);
      checks++;
      if (!wr_en && rd_data !== ref_m[a]) begin failures++; $display("FAIL: read %0d got %0d exp %0d", a, rd_data, ref_m[a]); end
      if (wr_en) ref_m[wr_addr] = wr_data;
      rd_en = 1'b0; wr_en = 1'b0; held = rd_data;
      @(negedge clk);
      checks++;
      if (rd_data !== held) begin failures++; $display("FAIL: read data changed without a read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
