// End-to-end testbench of the accelerator top (default parameters: 4x4 SPEs,
// 2 SPUs each, 16384 RVs per SPE), run on a small runtime tile (8x4 per SPE,
// 512 RVs in total) so it finishes quickly.
//
// The runtime port loads random singleton 1 and 2 data, an offset table that
// reaches into all eight neighbouring SPEs, and random initial labels. A DRAM
// model accepts 512-bit lines with random back-pressure and collects the log.
// Two runs:
//   1. temperature table for a moderate T, 12 iterations, histogram from
//      iteration 2 on, DRAM often not ready (forces the hold path);
//   2. temperature 0 (only minimum-energy labels can be drawn), 70 iterations
//      with histogram on, DRAM always ready: counts saturate at 63.
// After each run the log is flushed and every RV's on-chip entry is read.
// Checks, per RV: the log messages plus the two on-chip counts add up to the
// number of histogram iterations (no sample is lost or counted twice), all
// labels are below L, and message addresses belong to a loaded RV. The run
// length is checked against the schedule (one window of L cycles per group of
// S RVs plus one prologue window per colour phase). Mechanisms counted, each
// must occur: scheduler hold, phase flush, eviction messages, saturation
// messages, label and singleton 2 reads from other SPEs, histogram switch-on,
// DRAM back-pressure and log flush with a partial line. After the T = 0 run
// every white RV's final label must have minimum energy given its final
// neighbours (energy model recomputed here over the whole image, across SPEs).
module tb_mrf_accel;
  import mrf_pkg::*;
  localparam int D = 4, S = 2, RVS = 16384, N = D * D;
  localparam int W = 8, H = 4, L = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [13:0] cfg_w = 14'(W), cfg_h = 14'(H);
  logic [6:0]  cfg_num_labels = 7'(L);
  logic [3:0]  cfg_alpha = 4'd1, cfg_beta = 4'd2;
  logic [31:0] cfg_t_lut = '0;
  logic [15:0] cfg_num_iters = '0, cfg_hist_start = '0;
  logic start = 1'b0, busy, done, stalled, flushing, phase_black;
  logic log_flush = 1'b0, log_done;
  logic [31:0] log_index, dram_addr;
  logic dram_valid, dram_ready = 1'b1;
  logic [LINE_W-1:0] dram_data;
  logic host_we = 1'b0, host_re = 1'b0;
  host_tgt_t host_tgt = TGT_S1;
  logic [3:0] host_spe = '0;
  logic [13:0] host_r = '0, host_c = '0;
  logic [31:0] host_wdata = '0, host_rdata;

  mrf_accel dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- DRAM model ----------------
  int  dram_mode = 0;            // 0: always ready, 1: random with long stalls
  int  stall_left = 0;
  int  hist_sum [int];           // addr -> summed log counts
  int  n_msgs = 0, n_evict = 0, n_sat = 0, n_lines = 0, n_pad = 0, n_bp = 0, n_bad = 0;
  int  exp_line = 0;
  always @(negedge clk) begin
    if (dram_mode == 0) dram_ready <= 1'b1;
    else if (stall_left > 0) begin stall_left--; dram_ready <= 1'b0; end
    else if ($urandom_range(0, 99) == 0) begin stall_left = 300; dram_ready <= 1'b0; end
    else dram_ready <= ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (dram_valid && !dram_ready) n_bp++;
    if (dram_valid && dram_ready) begin
      if (dram_addr != 32'(exp_line)) n_bad++;
      exp_line++;
      n_lines++;
      for (int j = 0; j < 16; j++) begin
        log_msg_t m;
        m = dram_data[32*j +: 32];
        if (m.cnt == 0) n_pad++;
        else begin
          n_msgs++;
          if (m.cnt == CNT_MAX) n_sat++; else n_evict++;
          if (m.lbl >= L || m.addr[13:0] >= W * H) n_bad++;
          if (hist_sum.exists(int'(m.addr))) hist_sum[int'(m.addr)] += int'(m.cnt);
          else hist_sum[int'(m.addr)] = int'(m.cnt);
        end
      end
    end
  end

  // ---------------- mechanism probes ----------------
  int n_stall_total = 0;
  int n_stall = 0, n_flush = 0, n_xlbl = 0, n_xs2 = 0, n_hist_on = 0, run_cycles = 0;
  logic hist_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (stalled) begin n_stall++; n_stall_total++; end
    if (flushing) n_flush++;
    if (busy) run_cycles++;
    if (dut.u_array.g_row[1].g_col[1].u_spe.pf_valid_q &&
        |(dut.u_array.g_row[1].g_col[1].u_spe.u_lsw.xedge & dut.u_array.g_row[1].g_col[1].u_spe.u_lsw.nbr_vld))
      n_xlbl++;
    for (int k = 0; k < S; k++)
      if (dut.u_array.g_row[1].g_col[1].u_spe.st_valid_q &&
          dut.u_array.g_row[1].g_col[1].u_spe.u_s2.sel_src[k] != 4'd4)
        n_xs2++;
    hist_q <= dut.u_array.g_row[0].g_col[0].u_spe.u_sched.hist_en;
    if (dut.u_array.g_row[0].g_col[0].u_spe.u_sched.hist_en && !hist_q && busy) n_hist_on++;
  end

  // image-wide copies of the loaded data and of the read-back labels
  int d1g [H*D][W*D], d2g [H*D][W*D], labg [H*D][W*D];
  int dr_t [64], dc_t [64];
  int n_argmin = 0;

  // ---------------- runtime port ----------------
  task automatic hwrite(input int spe, input host_tgt_t tgt, input int r, input int c, input logic [31:0] d);
    @(negedge clk);
    host_we = 1'b1; host_tgt = tgt; host_spe = 4'(spe); host_r = 14'(r); host_c = 14'(c); host_wdata = d;
    @(negedge clk);
    host_we = 1'b0;
  endtask
  task automatic hread(input int spe, input int r, input int c, output logic [31:0] d);
    @(negedge clk);
    host_re = 1'b1; host_spe = 4'(spe); host_r = 14'(r); host_c = 14'(c);
    @(negedge clk);
    host_re = 1'b0;
    d = host_rdata;
  endtask

  // At temperature 0 only minimum-energy labels can be drawn. After the last
  // (white) phase every white RV's label must minimise its energy given the
  // final labels of its black neighbours, computed here over the whole image
  // (neighbours and singleton 2 beyond the image edge do not exist / read 0).
  task automatic check_argmin();
    for (int R = 0; R < H * D; R++)
      for (int C = 0; C < W * D; C++)
        if ((R + C) % 2 == 0) begin
          int emin, en [L];
          emin = 1 << 30;
          for (int l = 0; l < L; l++) begin
            int tr, tc, d2, e, nr [4], nc [4];
            tr = R + dr_t[l]; tc = C + dc_t[l];
            d2 = (tr >= 0 && tr < H * D && tc >= 0 && tc < W * D) ? d2g[tr][tc] : 0;
            e = int'(cfg_alpha) * (d1g[R][C] > d2 ? d1g[R][C] - d2 : d2 - d1g[R][C]);
            nr = '{R - 1, R + 1, R, R}; nc = '{C, C, C - 1, C + 1};
            for (int d = 0; d < 4; d++)
              if (nr[d] >= 0 && nr[d] < H * D && nc[d] >= 0 && nc[d] < W * D)
                e += int'(cfg_beta) * (l > labg[nr[d]][nc[d]] ? l - labg[nr[d]][nc[d]] : labg[nr[d]][nc[d]] - l);
            en[l] = e > 255 ? 255 : e;
            if (en[l] < emin) emin = en[l];
          end
          n_argmin++;
          check(en[labg[R][C]] == emin, $sformatf("RV (%0d,%0d): label %0d energy %0d, minimum %0d", R, C, labg[R][C], en[labg[R][C]], emin));
        end
  endtask

  task automatic init_labels();
    for (int s = 0; s < N; s++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          logic [5:0] m, l;
          m = 6'($urandom_range(0, L - 1));
          l = 6'($urandom_range(0, L - 1));
          hwrite(s, TGT_LMEM, r, c, {m, 4'b0, 6'b0, l, 4'b0, 6'b0});
        end
  endtask

  task automatic run(input logic [31:0] tlut, input int iters, input int hstart, input int mode);
    int t0;
    cfg_t_lut = tlut; cfg_num_iters = 16'(iters); cfg_hist_start = 16'(hstart);
    dram_mode = mode;
    hist_sum.delete();
    n_stall = 0;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    t0 = run_cycles;
    wait (done);
    @(negedge clk);
    begin
      int got, lo, hi;
      got = run_cycles - t0;
      lo  = 2 * iters * ((W * H / 2) / S + 1) * L;
      hi  = 2 * iters * (((W * H / 2) / S + 1) * L + 4 * L + 20) + n_stall;
      check(got >= lo && got <= hi, $sformatf("run length %0d not in [%0d,%0d]", got, lo, hi));
    end
    log_flush = 1'b1; @(negedge clk); log_flush = 1'b0;
    wait (log_done);
    repeat (4) @(negedge clk);
    for (int s = 0; s < N; s++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          logic [31:0] d;
          lmem_entry_t e;
          int a, tot;
          hread(s, r, c, d);
          e = lmem_entry_t'(d);
          labg[(s / D) * H + r][(s % D) * W + c] = int'(e.mrp_lbl);
          a = (s << 14) | (r * W + c);
          tot = int'(e.mrp_cnt) + int'(e.lrp_cnt) + (hist_sum.exists(a) ? hist_sum[a] : 0);
          check(tot == iters - hstart, $sformatf("SPE %0d (%0d,%0d): histogram total %0d, expected %0d", s, r, c, tot, iters - hstart));
          check(e.mrp_lbl < L && e.lrp_lbl < L, $sformatf("SPE %0d (%0d,%0d): label out of range", s, r, c));
        end
    foreach (hist_sum[a]) check((a & 16'h3fff) < W * H, $sformatf("log address %0h outside the tile", a));
    check(n_bad == 0, "bad DRAM line address or message");
  endtask

  initial begin
    fork
      begin
        repeat (3_000_000) @(posedge clk);
        $display("FAIL: watchdog");
        failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    join_none
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // offset table: dr in -1..1, dc in -3..3 (reaches all eight neighbours)
    for (int s = 0; s < N; s++)
      for (int l = 0; l < 64; l++)
        begin
          dr_t[l] = (l % 3) - 1; dc_t[l] = (l % 7) - 3;
          hwrite(s, TGT_LUT, 0, l, {16'b0, 8'((l % 3) - 1), 8'((l % 7) - 3)});
        end
    for (int s = 0; s < N; s++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          int R, C;
          R = (s / D) * H + r; C = (s % D) * W + c;
          d1g[R][C] = $urandom_range(0, 63); d2g[R][C] = $urandom_range(0, 63);
          hwrite(s, TGT_S1, r, c, 32'(d1g[R][C]));
          hwrite(s, TGT_S2, r, c, 32'(d2g[R][C]));
        end
    init_labels();
    // run 1: T = 20 -> th_k = floor(20 ln(15/k)) = 54, 40, 26, 12
    run({8'd54, 8'd40, 8'd26, 8'd12}, 12, 2, 1);
    init_labels();
    // run 2: T = 0, every iteration counted
    run(32'h0, 70, 0, 0);
    check_argmin();

    $display("mechanisms: stall=%0d flush=%0d evict=%0d sat=%0d xlbl=%0d xs2=%0d hist_on=%0d backpressure=%0d pad=%0d lines=%0d",
             n_stall, n_flush, n_evict, n_sat, n_xlbl, n_xs2, n_hist_on, n_bp, n_pad, n_lines);
    check(n_stall_total > 0, "scheduler hold never happened");
    check(n_flush > 0,   "phase flush never happened");
    check(n_evict > 0,   "no eviction message");
    check(n_sat > 0,     "no counter saturation");
    check(n_xlbl > 0,    "no label read from an adjacent SPE");
    check(n_xs2 > 0,     "no singleton 2 read from a neighbouring SPE");
    check(n_hist_on > 0, "histogram never switched on during a run");
    check(n_bp > 0,      "no DRAM back-pressure");
    check(n_pad > 0,     "no partial line flushed");
    check(n_lines > 0,   "no DRAM line written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
