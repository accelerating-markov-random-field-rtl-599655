// Testbench of the SPE network: a 2x2 array of SPEs (2 SPUs, 1024 RVs each),
// run on an 8x4 tile per SPE. The runtime port loads random singleton 1 and 2
// data, an offset table that reaches into all eight neighbouring SPEs, and
// random initial labels. A sink on each SPE's message channel accepts log
// messages with random back-pressure (long stalls force the hold path).
// Two runs:
//   1. temperature table for a moderate T, 12 iterations, histogram from
//      iteration 2 on, DRAM often not ready (forces the hold path);
//   2. temperature 0 (only minimum-energy labels can be drawn), 70 iterations
//      with histogram on, DRAM always ready: counts saturate at 63.
// After each run the channels drain and every RV's on-chip entry is read.
// Checks, per RV: the log messages plus the two on-chip counts add up to the
// number of histogram iterations (no sample is lost or counted twice), all
// labels are below L, and message addresses belong to a loaded RV. The run
// length is checked against the schedule (one window of L cycles per group of
// S RVs plus one prologue window per colour phase). Mechanisms counted, each
// must occur: scheduler hold, phase flush, eviction messages, saturation
// messages, label and singleton 2 reads from other SPEs, histogram switch-on,
// and channel back-pressure.
module tb_spe_array;
  import mrf_pkg::*;
  localparam int D = 2, S = 2, RVS = 1024, N = D * D;
  localparam int W = 8, H = 4, L = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [9:0] cfg_w = 10'(W), cfg_h = 10'(H);
  logic [6:0]  cfg_num_labels = 7'(L);
  logic [3:0]  cfg_alpha = 4'd1, cfg_beta = 4'd2;
  logic [31:0] cfg_t_lut = '0;
  logic [15:0] cfg_num_iters = '0, cfg_hist_start = '0;
  logic start = 1'b0, busy, done, hold, stalled, flushing, phase_black;
  logic [N-1:0] msg_valid, msg_ready = '1;
  log_msg_t [N-1:0] msg_data;
  logic host_we = 1'b0, host_re = 1'b0;
  host_tgt_t host_tgt = TGT_S1;
  logic [1:0] host_spe = '0;
  logic [9:0] host_r = '0, host_c = '0;
  logic [31:0] host_wdata = '0, host_rdata;

  spe_array #(.D(D), .S(S), .RVS(RVS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- message sinks ----------------
  int  dram_mode = 0;            // 0: always ready, 1: random with long stalls
  int  stall_left = 0;
  int  hist_sum [int];           // addr -> summed log counts
  int  n_msgs = 0, n_evict = 0, n_sat = 0, n_bp = 0, n_bad = 0;
  always @(negedge clk) begin
    if (dram_mode == 0) msg_ready <= '1;
    else if (stall_left > 0) begin stall_left--; msg_ready <= '0; end
    else if ($urandom_range(0, 99) == 0) begin stall_left = 3000; msg_ready <= '0; end
    else msg_ready <= N'($urandom);
  end
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < N; i++) begin
      if (msg_valid[i] && !msg_ready[i]) n_bp++;
      if (msg_valid[i] && msg_ready[i]) begin
        log_msg_t m;
        m = msg_data[i];
        n_msgs++;
        if (m.cnt == CNT_MAX) n_sat++; else n_evict++;
        if (m.lbl >= L || m.addr[9:0] >= W * H || m.cnt == 0) n_bad++;
        if (hist_sum.exists(int'(m.addr))) hist_sum[int'(m.addr)] += int'(m.cnt);
        else hist_sum[int'(m.addr)] = int'(m.cnt);
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
    if (dut.g_row[1].g_col[1].u_spe.pf_valid_q &&
        |(dut.g_row[1].g_col[1].u_spe.u_lsw.xedge & dut.g_row[1].g_col[1].u_spe.u_lsw.nbr_vld))
      n_xlbl++;
    for (int k = 0; k < S; k++)
      if (dut.g_row[1].g_col[1].u_spe.st_valid_q &&
          dut.g_row[1].g_col[1].u_spe.u_s2.sel_src[k] != 4'd4)
        n_xs2++;
    hist_q <= dut.g_row[0].g_col[0].u_spe.u_sched.hist_en;
    if (dut.g_row[0].g_col[0].u_spe.u_sched.hist_en && !hist_q && busy) n_hist_on++;
  end

  // ---------------- runtime port ----------------
  task automatic hwrite(input int spe, input host_tgt_t tgt, input int r, input int c, input logic [31:0] d);
    @(negedge clk);
    host_we = 1'b1; host_tgt = tgt; host_spe = 2'(spe); host_r = 10'(r); host_c = 10'(c); host_wdata = d;
    @(negedge clk);
    host_we = 1'b0;
  endtask
  task automatic hread(input int spe, input int r, input int c, output logic [31:0] d);
    @(negedge clk);
    host_re = 1'b1; host_spe = 2'(spe); host_r = 10'(r); host_c = 10'(c);
    @(negedge clk);
    host_re = 1'b0;
    d = host_rdata;
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
    dram_mode = 0;
    repeat (200) @(negedge clk);
    check(msg_valid == '0, "messages left in the queues");
    for (int s = 0; s < N; s++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          logic [31:0] d;
          lmem_entry_t e;
          int a, tot;
          hread(s, r, c, d);
          e = lmem_entry_t'(d);
          a = (s << 10) | (r * W + c);
          tot = int'(e.mrp_cnt) + int'(e.lrp_cnt) + (hist_sum.exists(a) ? hist_sum[a] : 0);
          check(tot == iters - hstart, $sformatf("SPE %0d (%0d,%0d): histogram total %0d, expected %0d", s, r, c, tot, iters - hstart));
          check(e.mrp_lbl < L && e.lrp_lbl < L, $sformatf("SPE %0d (%0d,%0d): label out of range", s, r, c));
        end
    foreach (hist_sum[a]) check((a & 16'h3ff) < W * H, $sformatf("log address %0h outside the tile", a));
    check(n_bad == 0, "bad message");
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
        hwrite(s, TGT_LUT, 0, l, {16'b0, 8'((l % 3) - 1), 8'((l % 7) - 3)});
    for (int s = 0; s < N; s++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          hwrite(s, TGT_S1, r, c, 32'($urandom_range(0, 63)));
          hwrite(s, TGT_S2, r, c, 32'($urandom_range(0, 63)));
        end
    init_labels();
    // run 1: T = 20 -> th_k = floor(20 ln(15/k)) = 54, 40, 26, 12
    run({8'd54, 8'd40, 8'd26, 8'd12}, 12, 2, 1);
    init_labels();
    // run 2: T = 0, every iteration counted
    run(32'h0, 70, 0, 0);

    $display("mechanisms: stall=%0d flush=%0d evict=%0d sat=%0d xlbl=%0d xs2=%0d hist_on=%0d backpressure=%0d",
             n_stall_total, n_flush, n_evict, n_sat, n_xlbl, n_xs2, n_hist_on, n_bp);
    check(n_stall_total > 0, "scheduler hold never happened");
    check(n_flush > 0,   "phase flush never happened");
    check(n_evict > 0,   "no eviction message");
    check(n_sat > 0,     "no counter saturation");
    check(n_xlbl > 0,    "no label read from an adjacent SPE");
    check(n_xs2 > 0,     "no singleton 2 read from a neighbouring SPE");
    check(n_hist_on > 0, "histogram never switched on during a run");
    check(n_bp > 0,      "no channel back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
