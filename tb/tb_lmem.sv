// Testbench of the label memory (8x8 tile, 256-RV configuration). A reference
// copy of every entry is kept in the testbench.
//   * runtime writes of random entries, then read-back of all of them;
//   * per colour phase: random write-backs of sampled labels to RVs of the
//     colour being updated, with the histogram switch random; the reference
//     applies the two-pair replacement rule (MRP hit, LRP hit with swap,
//     miss with eviction of the LRP; saturated counts logged as 63 and
//     restarted; warm-up clears the counts) and the log message must appear
//     two cycles after the write-back;
//   * in the same cycles, neighbour reads for random RVs of that colour: one
//     cycle later each of the four neighbours' MRP labels (wrapped at the tile
//     edge) must be on the output of the bank that holds it (bank table typed
//     in from the banking drawing);
//   * final read-back of every entry.
// Counts eviction, saturation and warm-up writes; each must occur.
module tb_lmem;
  import mrf_pkg::*;
  localparam int RVS = 256, W = 8, H = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [7:0] cfg_w = 8'(W), cfg_h = 8'(H), nrd_r = '0, nrd_c = '0, wb_r = '0, wb_c = '0, host_r = '0, host_c = '0;
  logic phase_black = 1'b1, nrd_en = 1'b0, wb_valid = 1'b0, hist_en = 1'b0, msg_valid, rmw_busy;
  logic host_we = 1'b0, host_re = 1'b0;
  logic [3:0][5:0] nbr_bank_lbl;
  logic [5:0] wb_lbl = '0;
  logic [19:0] wb_addr = '0;
  log_msg_t msg;
  lmem_entry_t host_wdata = '0, host_rdata;
  lmem #(.RVS(RVS)) dut (.*);

  int checks = 0, failures = 0, n_evict = 0, n_sat = 0, n_warm = 0;
  lmem_entry_t ref_e [H][W];
  int tbl [4][4] = '{'{0, 2, 1, 3}, '{0, 3, 1, 2}, '{1, 3, 0, 2}, '{1, 2, 0, 3}};
  typedef struct { bit v; log_msg_t m; } em_t;
  em_t drv_m, m1, m2;          // write-back driven now, sampled one and two edges ago
  typedef struct { bit v; int r; int c; } nr_t;
  nr_t drv_n, npend;            // neighbour read driven now, sampled one edge ago

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  function automatic void apply(input int r, input int c, input logic [5:0] nl, input bit he, output em_t o);
    lmem_entry_t cur, n;
    cur = ref_e[r][c];
    n = '0;
    o.v = 0; o.m = '0;
    if (!he) begin
      n.mrp_lbl = nl; n.lrp_lbl = cur.mrp_lbl; n_warm++;
    end else if (nl == cur.mrp_lbl) begin
      n = cur; n.unused0 = '0; n.unused1 = '0;
      if (cur.mrp_cnt == 63) begin o.v = 1; o.m = '{addr: 20'(r * W + c), lbl: nl, cnt: 6'd63}; n.mrp_cnt = 1; n_sat++; end
      else n.mrp_cnt = cur.mrp_cnt + 1;
    end else if (nl == cur.lrp_lbl) begin
      n.mrp_lbl = nl; n.lrp_lbl = cur.mrp_lbl; n.lrp_cnt = cur.mrp_cnt;
      if (cur.lrp_cnt == 63) begin o.v = 1; o.m = '{addr: 20'(r * W + c), lbl: nl, cnt: 6'd63}; n.mrp_cnt = 1; n_sat++; end
      else n.mrp_cnt = cur.lrp_cnt + 1;
    end else begin
      if (cur.lrp_cnt != 0) begin o.v = 1; o.m = '{addr: 20'(r * W + c), lbl: cur.lrp_lbl, cnt: cur.lrp_cnt}; n_evict++; end
      n.mrp_lbl = nl; n.mrp_cnt = 1; n.lrp_lbl = cur.mrp_lbl; n.lrp_cnt = cur.mrp_cnt;
    end
    ref_e[r][c] = n;
  endfunction

  // checks at each rising edge (before the testbench drives new values at the falling edge)
  always @(posedge clk) if (rst_n) begin
    chk(msg_valid == m2.v, "message valid");
    if (m2.v) chk(msg == m2.m, $sformatf("message %h expected %h", msg, m2.m));
    if (npend.v) begin
      int nr [4], nc [4];
      nr[DIR_UP] = (npend.r + H - 1) % H; nc[DIR_UP] = npend.c;
      nr[DIR_DOWN] = (npend.r + 1) % H;   nc[DIR_DOWN] = npend.c;
      nr[DIR_LEFT] = npend.r; nc[DIR_LEFT] = (npend.c + W - 1) % W;
      nr[DIR_RIGHT] = npend.r; nc[DIR_RIGHT] = (npend.c + 1) % W;
      for (int d = 0; d < 4; d++)
        chk(nbr_bank_lbl[tbl[nr[d] % 4][nc[d] % 4]] == ref_e[nr[d]][nc[d]].mrp_lbl,
            $sformatf("neighbour %0d of (%0d,%0d)", d, npend.r, npend.c));
    end
    m2 = m1; m1 = drv_m; npend = drv_n;
  end

  task automatic readback();
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        @(negedge clk); host_re = 1'b1; host_r = 8'(r); host_c = 8'(c);
        @(negedge clk); host_re = 1'b0;
        chk(host_rdata == ref_e[r][c], $sformatf("read-back (%0d,%0d): %h expected %h", r, c, host_rdata, ref_e[r][c]));
      end
  endtask

  task automatic phase(input bit black, input int n);
    phase_black = black;
    for (int i = 0; i < n; i++) begin
      int r, c;
      em_t o;
      @(negedge clk);
      drv_m.v = 0; drv_n.v = 0;
      // write-back
      if ($urandom_range(0, 3) != 0) begin
        do begin r = $urandom_range(0, H - 1); c = $urandom_range(0, W - 1); end while (((r + c) % 2 == 1) != black);
        wb_valid = 1'b1; wb_r = 8'(r); wb_c = 8'(c); wb_lbl = 6'($urandom_range(0, 3)); wb_addr = 20'(r * W + c);
        hist_en = ($urandom_range(0, 9) != 0);
        apply(r, c, wb_lbl, hist_en, o);
        drv_m = o;
      end else wb_valid = 1'b0;
      // neighbour read (labels of the other colour are not changed in this phase)
      if ($urandom_range(0, 1) != 0) begin
        do begin r = $urandom_range(0, H - 1); c = $urandom_range(0, W - 1); end while (((r + c) % 2 == 1) != black);
        nrd_en = 1'b1; nrd_r = 8'(r); nrd_c = 8'(c);
        drv_n.v = 1; drv_n.r = r; drv_n.c = c;
      end else nrd_en = 1'b0;
      // a write-back right after one to the same RV is not allowed; avoid it
      @(negedge clk);
      drv_m.v = 0; drv_n.v = 0;
      wb_valid = 1'b0; nrd_en = 1'b0;
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    drv_m.v = 0; m1.v = 0; m2.v = 0; drv_n.v = 0; npend.v = 0;
    fork begin repeat (200000) @(posedge clk); $display("FAIL: watchdog"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (2) @(negedge clk); rst_n = 1'b1;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        lmem_entry_t e;
        e = '0;
        e.mrp_lbl = 6'($urandom_range(0, 3)); e.lrp_lbl = 6'($urandom_range(0, 3));
        e.mrp_cnt = ($urandom_range(0, 3) == 0) ? 6'd63 : 6'($urandom_range(0, 62));
        e.lrp_cnt = ($urandom_range(0, 3) == 0) ? 6'd63 : 6'($urandom_range(0, 62));
        ref_e[r][c] = e;
        @(negedge clk); host_we = 1'b1; host_r = 8'(r); host_c = 8'(c); host_wdata = e;
        @(negedge clk); host_we = 1'b0;
      end
    readback();
    for (int k = 0; k < 6; k++) phase(k % 2 == 0, 400);
    readback();
    chk(n_evict > 0 && n_sat > 0 && n_warm > 0, $sformatf("mechanisms evict=%0d sat=%0d warm=%0d", n_evict, n_sat, n_warm));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
