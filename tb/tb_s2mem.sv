// Testbench of the singleton 2 memory (S=2, 8x8 tile, 256-RV configuration).
// Random data and a random offset table (row offset -7..7, column offset
// -7..7) are loaded through the runtime port. Reads of random label indices
// for random groups (S RVs of one row, two columns apart, as the scheduler
// forms them) are checked one cycle later against a reference: for SPU k the
// region code of RV + offset (3x3, 4 = this tile) and the value stored at the
// wrapped position, found on the bank that sel_bank names. Also checks that
// the S SPUs always use different banks and that every region code occurs.
module tb_s2mem;
  import mrf_pkg::*;
  localparam int S = 2, RVS = 256, W = 8, H = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [7:0] cfg_w = 8'(W), cfg_h = 8'(H), rd_r = '0, rd_c0 = '0, host_r = '0, host_c = '0;
  logic rd_en = 1'b0, host_we = 1'b0, lut_we = 1'b0;
  logic [5:0] rd_lbl = '0, host_wdata = '0, lut_idx = '0;
  logic signed [7:0] lut_dr = '0, lut_dc = '0;
  logic [S-1:0][5:0] bank_data;
  logic [S-1:0][3:0] sel_src;
  logic [S-1:0][0:0] sel_bank;
  s2mem #(.S(S), .RVS(RVS)) dut (.*);

  int checks = 0, failures = 0;
  int mem_r [H][W];
  int dr [64], dc [64];
  bit seen [9];
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask
  initial begin
    fork begin repeat (200000) @(posedge clk); $display("FAIL: watchdog"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (2) @(negedge clk); rst_n = 1'b1;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        mem_r[r][c] = $urandom_range(0, 63);
        @(negedge clk); host_we = 1'b1; host_r = 8'(r); host_c = 8'(c); host_wdata = 6'(mem_r[r][c]);
      end
    for (int l = 0; l < 64; l++) begin
      dr[l] = $urandom_range(0, 14) - 7; dc[l] = $urandom_range(0, 14) - 7;
      @(negedge clk); host_we = 1'b0; lut_we = 1'b1; lut_idx = 6'(l); lut_dr = 8'(dr[l]); lut_dc = 8'(dc[l]);
    end
    @(negedge clk); lut_we = 1'b0;
    for (int i = 0; i < 5000; i++) begin
      int r, c0, l;
      r = $urandom_range(0, H - 1);
      c0 = $urandom_range(0, 1) + 2 * S * $urandom_range(0, W / (2 * S) - 1);
      l = $urandom_range(0, 63);
      rd_en = 1'b1; rd_r = 8'(r); rd_c0 = 8'(c0); rd_lbl = 6'(l);
      @(negedge clk);
      rd_en = 1'b0;
      chk(sel_bank[0] != sel_bank[1], "two SPUs on one bank");
      for (int k = 0; k < S; k++) begin
        int tr, tc, rg, cg;
        tr = r + dr[l]; tc = c0 + 2 * k + dc[l];
        rg = tr < 0 ? 0 : (tr >= H ? 2 : 1);
        cg = tc < 0 ? 0 : (tc >= W ? 2 : 1);
        tr = (tr + H) % H; tc = (tc + W) % W;
        seen[rg * 3 + cg] = 1;
        chk(int'(sel_src[k]) == rg * 3 + cg, $sformatf("region of SPU %0d: %0d expected %0d", k, sel_src[k], rg * 3 + cg));
        chk(int'(bank_data[sel_bank[k]]) == mem_r[tr][tc], $sformatf("value of SPU %0d at (%0d,%0d)", k, tr, tc));
      end
      if ($urandom_range(0, 3) == 0) begin
        bit [5:0] held_v;
        held_v = bank_data[0];
        @(negedge clk);
        chk(bank_data[0] == held_v, "bank output changed without a read");
      end
    end
    foreach (seen[i]) chk(seen[i], $sformatf("region %0d never used", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
