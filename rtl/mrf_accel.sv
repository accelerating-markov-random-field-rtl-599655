// Markov random field Gibbs-sampling accelerator, top level.
//
// A D x D array of SPEs (each with S SPUs and a tile of up to RVS random
// variables) runs a two-colour Gibbs schedule over a first-order MRF; each
// SPE only talks to its nearest neighbours. Label histograms for uncertainty
// quantification are kept partly on chip (two label+count pairs per RV in the
// label memories) and partly as a log of 32-bit messages that a tree of DRAM
// hubs carries to the DRAM interface, which packs them into 512-bit lines.
//
// Use: while idle, load every SPE through the runtime port (singleton 1 and 2
// data, the offset table and initial labels), set the cfg_* inputs, pulse
// start, wait for done, pulse log_flush and wait for log_done. The histogram
// of each RV is then the sum of its log messages (lines 0..log_index-1 of
// DRAM) and its two on-chip counts (read through the runtime port).
// All cfg_* inputs must stay constant during a run. Ports are plain signals.
// The log_flush request waits until no SPE has a message waiting for 16
// cycles before it reaches the DRAM interface (this design's choice).
module mrf_accel
  import mrf_pkg::*;
#(
  parameter int D          = 4,        // SPE array is D x D
  parameter int S          = 2,        // SPUs per SPE
  parameter int RVS        = 16384,    // RVs per SPE
  parameter int FIFO_DEPTH = 64,       // log-message queue per SPE
  parameter int N          = D * D,
  parameter int COORD_W    = $clog2(RVS),
  parameter int ITER_W     = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // run configuration
  input  logic [COORD_W-1:0]   cfg_w,            // tile width (multiple of 4 and of 2S)
  input  logic [COORD_W-1:0]   cfg_h,            // tile height (multiple of 4)
  input  logic [6:0]           cfg_num_labels,   // S+1 .. 64
  input  logic [COEF_W-1:0]    cfg_alpha,
  input  logic [COEF_W-1:0]    cfg_beta,
  input  logic [31:0]          cfg_t_lut,        // {th1, th2, th4, th8}, see spu_e2p
  input  logic [ITER_W-1:0]    cfg_num_iters,
  input  logic [ITER_W-1:0]    cfg_hist_start,   // first iteration counted in the histogram
  // control and status
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic                 stalled,          // schedulers held by a full message queue
  output logic                 flushing,         // pipeline flush between colour phases
  output logic                 phase_black,
  input  logic                 log_flush,
  output logic                 log_done,
  output logic [31:0]          log_index,        // DRAM lines written so far
  // DRAM write port (512-bit lines)
  output logic                 dram_valid,
  input  logic                 dram_ready,
  output logic [31:0]          dram_addr,
  output logic [LINE_W-1:0]    dram_data,
  // runtime port
  input  logic                 host_we,
  input  logic                 host_re,
  input  host_tgt_t            host_tgt,
  input  logic [$clog2(N)-1:0] host_spe,
  input  logic [COORD_W-1:0]   host_r,
  input  logic [COORD_W-1:0]   host_c,
  input  logic [31:0]          host_wdata,
  output logic [31:0]          host_rdata
);
  localparam int LEVELS = $clog2(N) / 2;

  logic     [N-1:0] mv, mr;
  log_msg_t [N-1:0] md;
  logic             hv, hr;
  log_msg_t         hm;
  logic             hold_unused;

  spe_array #(.D(D), .S(S), .RVS(RVS), .FIFO_DEPTH(FIFO_DEPTH), .ITER_W(ITER_W)) u_array (
    .clk, .rst_n, .cfg_w, .cfg_h, .cfg_num_labels, .cfg_alpha, .cfg_beta, .cfg_t_lut,
    .cfg_num_iters, .cfg_hist_start, .start, .busy, .done, .hold(hold_unused), .stalled,
    .flushing, .phase_black, .msg_valid(mv), .msg_ready(mr), .msg_data(md),
    .host_we, .host_re, .host_tgt, .host_spe, .host_r, .host_c, .host_wdata, .host_rdata
  );

  dram_hub_tree #(.LEVELS(LEVELS)) u_tree (
    .clk, .rst_n, .in_valid(mv), .in_ready(mr), .in_msg(md),
    .out_valid(hv), .out_ready(hr), .out_msg(hm)
  );

  // flush request: forwarded once the message network has been quiet a while
  logic       flush_req, flush_go;
  logic [4:0] quiet;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flush_req <= 1'b0; quiet <= '0;
    end else begin
      quiet <= (|mv || hv) ? '0 : (quiet == 5'd16 ? quiet : quiet + 5'd1);
      if (log_flush)     flush_req <= 1'b1;
      else if (flush_go) flush_req <= 1'b0;
    end
  end
  assign flush_go = flush_req && (quiet == 5'd16) && !busy;

  dram_if #(.IDX_W(32)) u_dif (
    .clk, .rst_n, .in_valid(hv), .in_ready(hr), .in_msg(hm),
    .flush(flush_go), .flush_done(log_done),
    .dram_valid, .dram_ready, .dram_addr, .dram_data, .log_index
  );
endmodule
