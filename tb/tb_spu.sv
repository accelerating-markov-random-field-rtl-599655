// Testbench of the SPU. RVs with random singleton data, neighbour labels and
// neighbour masks are streamed in (L cycles each, sometimes back to back,
// sometimes with gaps). A reference model in the testbench computes each
// label's energy alpha*|d1-d2| + beta*sum|l-n| (saturated at 255), the scaled
// energy E - Emin and the transition weight from the threshold word.
// Checks per RV: out_valid set 3*L+1 clock edges after its first label,
// tag passed through, and the sampled label has a nonzero weight. Runs:
//   L=16 random temperature table; L=3 (smallest) and L=64 (largest);
//   temperature 0: the label must be a minimum-energy label;
//   all energies equal: the 8 labels must be drawn about equally often.
module tb_spu;
  import mrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [6:0] cfg_num_labels = 7'd16;
  logic [3:0] cfg_alpha = 4'd2, cfg_beta = 4'd3;
  logic [31:0] cfg_t_lut = '0;
  logic in_valid = 1'b0, in_first = 1'b0;
  logic [5:0] in_d1 = '0, in_d2 = '0;
  logic [3:0][5:0] in_nbr = '0;
  logic [3:0] in_nbr_vld = '0;
  logic [15:0] in_tag = '0;
  logic out_valid, busy;
  logic [5:0] out_lbl;
  logic [15:0] out_tag;
  spu #(.TAG_W(16)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  typedef struct { int t0; int tag; bit ok [64]; } exp_t;
  exp_t q [$];
  int hist [64];
  always @(posedge clk) begin
   if (rst_n && out_valid) begin
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      exp_t e;
      e = q.pop_front();
      if (cyc - e.t0 != 3 * int'(cfg_num_labels) + 1) begin failures++; $display("FAIL: latency %0d", cyc - e.t0); end
      checks++;
      if (int'(out_tag) != e.tag) begin failures++; $display("FAIL: tag %0d exp %0d", out_tag, e.tag); end
      checks++;
      if (!e.ok[out_lbl]) begin failures++; $display("FAIL: label %0d has zero weight (tag %0d)", out_lbl, e.tag); end
      hist[out_lbl]++;
    end
   end
   cyc++;
  end

  function automatic int absd(input int a, input int b); return a > b ? a - b : b - a; endfunction

  int ntag = 0;
  task automatic send_rv(input bit tmin_only);
    int L, en [64], emin;
    logic [5:0] d2 [64];
    exp_t e;
    L = int'(cfg_num_labels);
    @(negedge clk);
    in_d1 = 6'($urandom);
    for (int d = 0; d < 4; d++) in_nbr[d] = 6'($urandom_range(0, L - 1));
    in_nbr_vld = 4'($urandom);
    in_tag = 16'(ntag);
    emin = 1 << 30;
    for (int l = 0; l < L; l++) begin
      int s;
      d2[l] = 6'($urandom);
      s = int'(cfg_alpha) * absd(int'(in_d1), int'(d2[l]));
      for (int d = 0; d < 4; d++) if (in_nbr_vld[d]) s += int'(cfg_beta) * absd(l, int'(in_nbr[d]));
      en[l] = s > 255 ? 255 : s;
      if (en[l] < emin) emin = en[l];
    end
    for (int l = 0; l < 64; l++) e.ok[l] = 0;
    for (int l = 0; l < L; l++) e.ok[l] = (en[l] - emin) <= int'(cfg_t_lut[31:24]);
    e.tag = ntag; ntag++;
    for (int l = 0; l < L; l++) begin
      in_valid = 1'b1; in_first = (l == 0); in_d2 = d2[l];
      if (l == 0) begin e.t0 = cyc + 1; q.push_back(e); end
      @(negedge clk);
    end
    in_valid = 1'b0; in_first = 1'b0;
    // back-to-back most of the time
    repeat ($urandom_range(0, 3) == 0 ? $urandom_range(1, 5) : 0) @(negedge clk);
    #0;
    // re-enter at the negedge already reached
  endtask

  task automatic drain();
    int n = 0;
    while ((q.size() != 0 || busy) && n < 1000) begin @(negedge clk); n++; end
  endtask

  // send_rv starts with @(negedge clk); make the stream truly back to back
  task automatic batch(input int n);
    for (int i = 0; i < n; i++) send_rv(0);
    drain();
  endtask

  initial begin
    foreach (hist[i]) hist[i] = 0;
    fork begin repeat (2_000_000) @(posedge clk); $display("FAIL: watchdog"); failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (3) @(negedge clk); rst_n = 1'b1;
    // T = 10: th_k = floor(10 ln(15/k)) = 27, 20, 13, 6
    cfg_t_lut = {8'd27, 8'd20, 8'd13, 8'd6};
    cfg_num_labels = 7'd16; batch(400);
    cfg_num_labels = 7'd3;  batch(400);
    cfg_num_labels = 7'd64; batch(200);
    cfg_t_lut = '0; cfg_num_labels = 7'd10; batch(400);
    // equal energies
    cfg_alpha = '0; cfg_beta = '0; cfg_t_lut = {8'd27, 8'd20, 8'd13, 8'd6}; cfg_num_labels = 7'd8;
    foreach (hist[i]) hist[i] = 0;
    batch(4000);
    for (int l = 0; l < 8; l++) begin
      checks++;
      if (hist[l] < 380 || hist[l] > 620) begin failures++; $display("FAIL: label %0d drawn %0d of 4000", l, hist[l]); end
    end
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d RVs without output", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
