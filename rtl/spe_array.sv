// SPE network: a D x D array of SPEs with nearest-neighbour links only.
// Label links join each SPE to its top, bottom, left and right neighbours;
// singleton 2 links join it to all eight neighbours (diagonals included), as
// in the source's topology drawing. Links that would leave the array carry
// zeros; the SPEs on the edge know it through at_edge and drop those
// neighbours. Every SPE runs the same schedule in lockstep: start is
// broadcast, hold is the OR of all message-queue almost-full flags, all_idle
// the AND of all pipeline-empty flags. SPE (row, col) has log id row*D+col;
// its message channel leaves on msg_*[i] with i its Z-order (Morton) index, so
// four consecutive channels form a 2x2 region for the DRAM hub tree.
// The runtime port addresses one SPE (host_spe = row*D+col); read data comes
// one cycle after host_re. D must be a power of two.
module spe_array
  import mrf_pkg::*;
#(
  parameter int D          = 4,
  parameter int S          = 2,
  parameter int RVS        = 16384,
  parameter int FIFO_DEPTH = 64,
  parameter int N          = D * D,
  parameter int COORD_W    = $clog2(RVS),
  parameter int ID_W       = MSG_ADDR_W - $clog2(RVS),
  parameter int ITER_W     = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [COORD_W-1:0]    cfg_w,
  input  logic [COORD_W-1:0]    cfg_h,
  input  logic [6:0]            cfg_num_labels,
  input  logic [COEF_W-1:0]     cfg_alpha,
  input  logic [COEF_W-1:0]     cfg_beta,
  input  logic [31:0]           cfg_t_lut,
  input  logic [ITER_W-1:0]     cfg_num_iters,
  input  logic [ITER_W-1:0]     cfg_hist_start,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  hold,
  output logic                  stalled,
  output logic                  flushing,
  output logic                  phase_black,
  output logic     [N-1:0]      msg_valid,
  input  logic     [N-1:0]      msg_ready,
  output log_msg_t [N-1:0]      msg_data,
  input  logic                  host_we,
  input  logic                  host_re,
  input  host_tgt_t             host_tgt,
  input  logic [$clog2(N)-1:0]  host_spe,
  input  logic [COORD_W-1:0]    host_r,
  input  logic [COORD_W-1:0]    host_c,
  input  logic [31:0]           host_wdata,
  output logic [31:0]           host_rdata
);
  localparam int DB = $clog2(D);

  logic [N-1:0][3:0][LBL_W-1:0]      lbl_out;
  logic [N-1:0][S-1:0][LBL_W-1:0]    s2_out;
  logic [N-1:0]                      pipe_idle, afull, sbusy, sdone, sstall, sflush, sphase;
  logic [N-1:0][31:0]                rdata;
  logic [$clog2(N)-1:0]              rd_sel;
  logic                              all_idle;

  assign hold     = |afull;
  assign all_idle = &pipe_idle;

  function automatic int morton(input int r, input int c);
    int m = 0;
    for (int b = 0; b < DB; b++) begin
      m |= ((c >> b) & 1) << (2 * b);
      m |= ((r >> b) & 1) << (2 * b + 1);
    end
    return m;
  endfunction

  for (genvar r = 0; r < D; r++) begin : g_row
    for (genvar c = 0; c < D; c++) begin : g_col
      localparam int I = r * D + c;
      logic [3:0][3:0][LBL_W-1:0]   lin;
      logic [8:0][S-1:0][LBL_W-1:0] sin;
      logic [3:0]                   edge_f;

      assign edge_f[DIR_UP]    = (r == 0);
      assign edge_f[DIR_DOWN]  = (r == D - 1);
      assign edge_f[DIR_LEFT]  = (c == 0);
      assign edge_f[DIR_RIGHT] = (c == D - 1);

      assign lin[DIR_UP]    = (r > 0)     ? lbl_out[(r > 0 ? I - D : I)]     : '0;
      assign lin[DIR_DOWN]  = (r < D - 1) ? lbl_out[(r < D - 1 ? I + D : I)] : '0;
      assign lin[DIR_LEFT]  = (c > 0)     ? lbl_out[(c > 0 ? I - 1 : I)]     : '0;
      assign lin[DIR_RIGHT] = (c < D - 1) ? lbl_out[(c < D - 1 ? I + 1 : I)] : '0;

      for (genvar dr = -1; dr <= 1; dr++) begin : g_sr
        for (genvar dc = -1; dc <= 1; dc++) begin : g_sc
          localparam bit INSIDE = (r + dr >= 0) && (r + dr < D) && (c + dc >= 0) && (c + dc < D);
          if (INSIDE) begin : g_in
            assign sin[(dr + 1) * 3 + (dc + 1)] = s2_out[(r + dr) * D + (c + dc)];
          end else begin : g_out
            assign sin[(dr + 1) * 3 + (dc + 1)] = '0;
          end
        end
      end

      spe #(.S(S), .RVS(RVS), .FIFO_DEPTH(FIFO_DEPTH), .SEED(19'h1F00D ^ 19'(I * 19'h0B5A3)),
            .ITER_W(ITER_W)) u_spe (
        .clk, .rst_n, .cfg_w, .cfg_h, .cfg_num_labels, .cfg_alpha, .cfg_beta, .cfg_t_lut,
        .cfg_num_iters, .cfg_hist_start, .spe_id(ID_W'(I)), .at_edge(edge_f),
        .start, .hold, .all_idle, .pipe_idle(pipe_idle[I]), .msg_afull(afull[I]),
        .busy(sbusy[I]), .done(sdone[I]), .stalled(sstall[I]), .flushing(sflush[I]),
        .phase_black(sphase[I]),
        .lbl_out(lbl_out[I]), .lbl_in(lin), .s2_out(s2_out[I]), .s2_in(sin),
        .msg_valid(msg_valid[morton(r, c)]), .msg_ready(msg_ready[morton(r, c)]),
        .msg_data(msg_data[morton(r, c)]),
        .host_we(host_we && host_spe == ($clog2(N))'(I)), .host_re(host_re && host_spe == ($clog2(N))'(I)),
        .host_tgt, .host_r, .host_c, .host_wdata, .host_rdata(rdata[I])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       rd_sel <= '0;
    else if (host_re) rd_sel <= host_spe;
  end
  assign host_rdata  = rdata[rd_sel];
  assign busy        = |sbusy;
  assign done        = sdone[0];
  assign stalled     = sstall[0];
  assign flushing    = sflush[0];
  assign phase_black = sphase[0];

  // lockstep: all SPEs are in the same scheduler state
  assert property (@(posedge clk) disable iff (!rst_n) (sbusy == '0 || sbusy == '1) && (sstall == '0 || sstall == '1));
endmodule
