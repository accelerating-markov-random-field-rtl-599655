// Testbench of the singleton 2 switch: random bank words from the nine regions
// (this SPE and its eight neighbours); every (region, bank) select must return
// exactly that word, and an unused region code must return 0.
module tb_s2_switch;
  import mrf_pkg::*;
  localparam int S = 4;
  logic [8:0][S-1:0][LBL_W-1:0] bank_in;
  logic [3:0] sel_src;
  logic [1:0] sel_bank;
  logic [LBL_W-1:0] d2;
  s2_switch #(.S(S)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < 9; i++) for (int b = 0; b < S; b++) bank_in[i][b] = 6'($urandom);
      for (int i = 0; i < 16; i++) for (int b = 0; b < S; b++) begin
        sel_src = 4'(i); sel_bank = 2'(b);
        #1;
        checks++;
        if (d2 !== (i < 9 ? bank_in[i][b] : 6'd0)) begin
          failures++; $display("FAIL: src %0d bank %0d got %0d", i, b, d2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
