// DRAM hub network: a tree of four-input DRAM hubs. The N = 4^LEVELS message
// sources (SPEs) feed N/4 hubs, whose outputs feed N/16 hubs, and so on up to
// one root hub connected to the DRAM interface. Source i is the i-th SPE in
// Z (Morton) order, so each first-level hub serves a 2x2 region of SPEs as in
// the source's drawing; the array does that ordering. Latency: one cycle per
// level when not back-pressured.
module dram_hub_tree
  import mrf_pkg::*;
#(
  parameter int LEVELS = 2,
  parameter int N      = 4 ** LEVELS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic     [N-1:0]    in_valid,
  output logic     [N-1:0]    in_ready,
  input  log_msg_t [N-1:0]    in_msg,
  output logic                out_valid,
  input  logic                out_ready,
  output log_msg_t            out_msg
);
  // channel arrays per level; level 0 = the sources, level LEVELS = the root output
  logic     [LEVELS:0][N-1:0] v, r;
  log_msg_t [LEVELS:0][N-1:0] m;

  assign v[0]     = in_valid;
  assign m[0]     = in_msg;
  assign in_ready = r[0];

  for (genvar lv = 0; lv < LEVELS; lv++) begin : g_lv
    localparam int NH = N >> (2 * (lv + 1));   // hubs at this level
    for (genvar h = 0; h < NH; h++) begin : g_hub
      dram_hub u_hub (
        .clk, .rst_n,
        .in_valid(v[lv][4*h +: 4]), .in_ready(r[lv][4*h +: 4]), .in_msg(m[lv][4*h +: 4]),
        .out_valid(v[lv+1][h]), .out_ready(r[lv+1][h]), .out_msg(m[lv+1][h])
      );
    end
    // unused upper channels of the next level
    if (NH < N) begin : g_tie
      assign v[lv+1][N-1:NH] = '0;
      assign m[lv+1][N-1:NH] = '0;
    end
  end

  assign out_valid = v[LEVELS][0];
  assign out_msg   = m[LEVELS][0];
  assign r[LEVELS] = N'(out_ready);
endmodule
