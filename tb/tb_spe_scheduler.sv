// Testbench of the SPE scheduler (S=2). The testbench models the SPE pipeline
// as busy for 3L+6 cycles after the last label cycle (drives all_idle) and
// raises hold in random bursts. For several tile sizes and label counts it
// checks:
//   * every colour phase visits each RV of its colour exactly once, black
//     ((r+c) odd) first, phases alternating, 2 x cfg_num_iters phases, then
//     one done pulse;
//   * each group is a window of exactly L label cycles 0..L-1 for S RVs in
//     one row two columns apart;
//   * the prefetches issued in a window name exactly the RVs of the next
//     group (SPU k's RV with pf_k = k) and fall in the window's first S cycles;
//   * hist_en is on exactly in iterations >= cfg_hist_start;
//   * no window starts while hold is high, and the run takes
//     2*iters*(groups+1)*L cycles plus flush and hold cycles only.
module tb_spe_scheduler;
  import mrf_pkg::*;
  localparam int S = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [13:0] cfg_w = '0, cfg_h = '0;
  logic [6:0] cfg_num_labels = '0;
  logic [15:0] cfg_num_iters = '0, cfg_hist_start = '0;
  logic start = 1'b0, hold = 1'b0, all_idle;
  logic st_valid, st_first, pf_valid, win_end, phase_black, hist_en, busy, done, stalled, flushing;
  logic [5:0] st_lbl;
  logic [13:0] st_r, st_c0, pf_r, pf_c;
  logic [1:0] pf_k;
  logic [15:0] iter;
  spe_scheduler #(.S(S), .COORD_W(14), .ITER_W(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  int W, H, L, ITERS, HS;
  int cov [64][64];
  int pipe_cnt = 0, lbl_exp = 0, win_cyc = 0, phases = 0, n_done = 0, cycles = 0, n_hold = 0, n_stall = 0;
  bit in_win = 0, cur_black = 1, hold_q = 0, run_on = 0;
  int pf_r_l [$], pf_c_l [$], pf_k_l [$];   // prefetches since the last group start

  assign all_idle = (pipe_cnt == 0);

  task automatic end_phase(input bit black);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        if (((r + c) % 2 == 1) == black) begin
          chk(cov[r][c] == 1, $sformatf("phase %0d: RV (%0d,%0d) visited %0d times", phases, r, c, cov[r][c]));
          cov[r][c] = 0;
        end else chk(cov[r][c] == 0, "RV of the other colour visited");
    phases++;
  endtask

  always @(posedge clk) if (rst_n && run_on) begin
    cycles++;
    if (stalled) n_stall++;
    if (pipe_cnt > 0) pipe_cnt--;
    if (st_valid) begin
      pipe_cnt = 3 * L + 6;
      chk(int'(st_lbl) == lbl_exp, $sformatf("label %0d expected %0d", st_lbl, lbl_exp));
      chk(st_first == (lbl_exp == 0), "st_first");
      if (st_first) begin
        chk(!hold_q, "window started while hold was high");
        chk(phase_black == cur_black, "phase colour");
        chk(hist_en == (phases / 2 >= HS), $sformatf("hist_en in iteration %0d", phases / 2));
        // the prefetches of the previous window must name this group
        chk(pf_r_l.size() == S, $sformatf("%0d prefetches for a group", pf_r_l.size()));
        for (int k = 0; k < S; k++) begin
          int c;
          c = int'(st_c0) + 2 * k;
          chk(c < W, "group beyond the tile");
          if (c < W) cov[st_r][c]++;
          if (k < pf_r_l.size())
            chk(pf_r_l[k] == int'(st_r) && pf_c_l[k] == c && pf_k_l[k] == k,
                $sformatf("prefetch %0d: (%0d,%0d) for RV (%0d,%0d)", k, pf_r_l[k], pf_c_l[k], st_r, c));
        end
        pf_r_l.delete(); pf_c_l.delete(); pf_k_l.delete();
        win_cyc = 0;
      end
      lbl_exp = (lbl_exp + 1) % L;
    end else chk(lbl_exp == 0, "label stream interrupted");
    if (pf_valid) begin
      pf_r_l.push_back(int'(pf_r)); pf_c_l.push_back(int'(pf_c)); pf_k_l.push_back(int'(pf_k));
    end
    if (pf_valid && st_valid) chk(win_cyc < S, "prefetch after the first S cycles of a window");
    if (st_valid) win_cyc++;
    if (phase_black != cur_black && busy) begin
      end_phase(cur_black);
      cur_black = phase_black;
    end
    if (done) begin
      n_done++;
      end_phase(cur_black);
    end
    hold_q = hold;
  end

  always @(negedge clk) if (run_on) begin
    if ($urandom_range(0, 199) == 0) n_hold = $urandom_range(5, 40);
    if (n_hold > 0) begin hold <= 1'b1; n_hold--; end else hold <= 1'b0;
  end

  task automatic run(input int w, input int h, input int l, input int it, input int hs);
    int lo, hi;
    W = w; H = h; L = l; ITERS = it; HS = hs;
    cfg_w = 14'(w); cfg_h = 14'(h); cfg_num_labels = 7'(l); cfg_num_iters = 16'(it); cfg_hist_start = 16'(hs);
    foreach (cov[i, j]) cov[i][j] = 0;
    phases = 0; n_done = 0; cycles = 0; n_stall = 0; cur_black = 1; lbl_exp = 0;
    pf_r_l.delete(); pf_c_l.delete(); pf_k_l.delete();
    @(negedge clk); start = 1'b1; run_on = 1;
    @(negedge clk); start = 1'b0;
    wait (n_done == 1);
    @(negedge clk); run_on = 0; hold = 1'b0;
    repeat (5) @(negedge clk);
    chk(phases == 2 * it, $sformatf("%0d phases, expected %0d", phases, 2 * it));
    chk(!busy, "busy after done");
    lo = 2 * it * ((w * h / 2) / S + 1) * l;
    hi = lo + 2 * it * (3 * l + 16) + n_stall;
    chk(cycles >= lo && cycles <= hi, $sformatf("run of %0d cycles not in [%0d,%0d]", cycles, lo, hi));
    chk(n_stall > 0 || it < 3, "hold never stalled the scheduler");
  endtask

  initial begin
    fork begin repeat (2_000_000) @(posedge clk); $display("FAIL: watchdog"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(8, 4, 8, 4, 1);
    run(16, 8, 3, 3, 0);
    run(4, 4, 64, 2, 1);
    run(12, 12, 5, 5, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
