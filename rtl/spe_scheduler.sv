// Scheduler of one SPE: the checkerboard (two-colour) Gibbs schedule.
//
// One run is cfg_num_iters iterations; each iteration updates all black RVs
// ((r+c) odd), flushes the pipeline, then updates all white RVs and flushes
// again, as the source describes. Within a colour phase the RVs are taken in
// groups of S: S RVs of that colour in one row, two columns apart, one per
// SPU. A group occupies a window of L cycles (L = number of labels) in which
// label l = 0..L-1 is streamed to all S SPUs together (st_* outputs, which
// drive the singleton 2 reads). In the first S cycles of every window the
// scheduler also issues one prefetch per cycle (pf_*), the neighbour labels
// and singleton 1 of SPU k's RV in the NEXT group; so the label memory and
// singleton 1 memory are read once per RV, in a pipelined way. A phase
// therefore starts with one prologue window that only prefetches. win_end
// marks the last cycle of every window: the SPE then moves the prefetched
// values to the registers feeding the SPUs. Needs L >= S+1.
//
// hold (global, from the log-message FIFOs) delays the start of the next
// window; all_idle (global AND of every SPE's pipeline-empty flag) ends a
// flush, so all SPEs stay in lockstep. hist_en is set from iteration
// cfg_hist_start on (histogram collection after warm-up).
// The grouping, prefetch timing and hold/flush handshake are this design's
// choices; the colour order and flush follow the source.
module spe_scheduler
  import mrf_pkg::*;
#(
  parameter int S       = 2,
  parameter int COORD_W = 14,
  parameter int ITER_W  = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cfg_w,
  input  logic [COORD_W-1:0] cfg_h,
  input  logic [6:0]         cfg_num_labels,
  input  logic [ITER_W-1:0]  cfg_num_iters,
  input  logic [ITER_W-1:0]  cfg_hist_start,
  input  logic               start,
  input  logic               hold,
  input  logic               all_idle,
  // label stream of the current group
  output logic               st_valid,
  output logic [LBL_W-1:0]   st_lbl,
  output logic               st_first,
  output logic [COORD_W-1:0] st_r,
  output logic [COORD_W-1:0] st_c0,
  // prefetch of the next group
  output logic               pf_valid,
  output logic [$clog2(S+1)-1:0] pf_k,
  output logic [COORD_W-1:0] pf_r,
  output logic [COORD_W-1:0] pf_c,
  output logic               win_end,
  // status
  output logic               phase_black,
  output logic               hist_en,
  output logic               busy,
  output logic               done,
  output logic               stalled,
  output logic               flushing,
  output logic [ITER_W-1:0]  iter
);
  typedef enum logic [1:0] {IDLE, WIN, HOLD, DRAIN} state_t;
  state_t state;

  logic [COORD_W-1:0] row, gi, gpr;
  logic               prologue;
  logic [6:0]         lcnt;
  logic [1:0]         dcnt;
  logic               last_group, has_next;
  logic [COORD_W-1:0] nrow, ngi;

  assign gpr        = cfg_w >> ($clog2(S) + 1);       // groups per row
  assign last_group = (row == cfg_h - 1'b1) && (gi == gpr - 1'b1);
  assign has_next   = prologue || !last_group;
  always_comb begin
    if (prologue)               begin nrow = '0;         ngi = '0;        end
    else if (gi == gpr - 1'b1)  begin nrow = row + 1'b1; ngi = '0;        end
    else                        begin nrow = row;        ngi = gi + 1'b1; end
  end

  function automatic logic [COORD_W-1:0] first_col(input logic [COORD_W-1:0] r, input logic blk);
    return COORD_W'(r[0] ^ blk);
  endfunction

  assign st_valid = (state == WIN) && !prologue;
  assign st_lbl   = LBL_W'(lcnt);
  assign st_first = (lcnt == 7'd0);
  assign st_r     = row;
  assign st_c0    = first_col(row, phase_black) + ((gi << $clog2(S)) << 1);
  assign pf_valid = (state == WIN) && has_next && (lcnt < 7'(S));
  assign pf_k     = ($clog2(S+1))'(lcnt);
  assign pf_r     = nrow;
  assign pf_c     = first_col(nrow, phase_black) + ((ngi << $clog2(S)) << 1) + (COORD_W'(lcnt) << 1);
  assign win_end  = (state == WIN) && (lcnt == cfg_num_labels - 7'd1);
  assign hist_en  = (iter >= cfg_hist_start);
  assign busy     = (state != IDLE);
  assign stalled  = (state == HOLD);
  assign flushing = (state == DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; row <= '0; gi <= '0; prologue <= 1'b1; lcnt <= '0; dcnt <= '0;
      phase_black <= 1'b1; iter <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= WIN; prologue <= 1'b1; lcnt <= '0; row <= '0; gi <= '0;
          phase_black <= 1'b1; iter <= '0;
        end
        WIN: begin
          lcnt <= lcnt + 7'd1;
          if (win_end) begin
            lcnt <= '0;
            if (!prologue && last_group) begin
              state <= DRAIN; dcnt <= '0;
            end else begin
              row <= nrow; gi <= ngi; prologue <= 1'b0;
              if (hold) state <= HOLD;
            end
          end
        end
        HOLD: if (!hold) state <= WIN;
        DRAIN: begin
          if (dcnt != 2'd3) dcnt <= dcnt + 2'd1;
          else if (all_idle) begin
            prologue <= 1'b1; row <= '0; gi <= '0; lcnt <= '0;
            if (phase_black) begin
              phase_black <= 1'b0; state <= WIN;
            end else begin
              phase_black <= 1'b1;
              iter <= iter + 1'b1;
              if (iter + 1'b1 == cfg_num_iters) begin state <= IDLE; done <= 1'b1; end
              else state <= WIN;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
