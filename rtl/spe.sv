// Stochastic Processing Element (SPE): one tile of the accelerator. It owns a
// w x h tile of the random field and updates it with S SPUs.
//
// Parts: scheduler, singleton 1 memory, singleton 2 memory with its offset
// table, label memory (black and white halves, banked), a label switch, one
// singleton 2 switch per SPU, S SPUs, a write-back stage and a queue for log
// messages toward the DRAM hub.
//
// Data flow (scheduler cycle t, memory data at t+1):
//   * prefetch: in the first S cycles of a window the neighbour labels and
//     singleton 1 of SPU k's RV in the next group are read, passed through the
//     label switch and kept in pre_* registers; at the end of the window they
//     move to cur_* registers that feed the SPUs for the next L cycles;
//   * label stream: every cycle of a window each SPU receives the singleton 2
//     value of label l from its S2Mem switch;
//   * write-back: the S SPUs finish together; their labels are written into
//     the label memory one per cycle (read-modify-write, may log a message).
// Links: lbl_out (the four label banks read this cycle) goes to the four
// adjacent SPEs, lbl_in[DIR] comes from them; s2_out (the S singleton 2 banks)
// goes to all eight neighbours, s2_in[region] comes from them (region 4,
// this SPE, is not used). Global control: hold (any message queue almost full)
// and all_idle (every SPE's pipeline empty) are combined by the array.
// The log address of an RV is {spe_id, r*w + c}.
// Queue depth and almost-full margin are this design's choices.
module spe
  import mrf_pkg::*;
#(
  parameter int S          = 2,
  parameter int RVS        = 16384,
  parameter int FIFO_DEPTH = 64,
  parameter logic [18:0] SEED = 19'h1F00D,
  parameter int COORD_W    = $clog2(RVS),
  parameter int ADDR_W     = $clog2(RVS),
  parameter int ID_W       = MSG_ADDR_W - ADDR_W,
  parameter int ITER_W     = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration
  input  logic [COORD_W-1:0]           cfg_w,
  input  logic [COORD_W-1:0]           cfg_h,
  input  logic [6:0]                   cfg_num_labels,
  input  logic [COEF_W-1:0]            cfg_alpha,
  input  logic [COEF_W-1:0]            cfg_beta,
  input  logic [31:0]                  cfg_t_lut,
  input  logic [ITER_W-1:0]            cfg_num_iters,
  input  logic [ITER_W-1:0]            cfg_hist_start,
  input  logic [ID_W-1:0]              spe_id,
  input  logic [3:0]                   at_edge,
  // control
  input  logic                         start,
  input  logic                         hold,
  input  logic                         all_idle,
  output logic                         pipe_idle,
  output logic                         msg_afull,
  output logic                         busy,
  output logic                         done,
  output logic                         stalled,
  output logic                         flushing,
  output logic                         phase_black,
  // links to neighbouring SPEs
  output logic [3:0][LBL_W-1:0]        lbl_out,
  input  logic [3:0][3:0][LBL_W-1:0]   lbl_in,
  output logic [S-1:0][LBL_W-1:0]      s2_out,
  input  logic [8:0][S-1:0][LBL_W-1:0] s2_in,
  // log messages toward the DRAM hub
  output logic                         msg_valid,
  input  logic                         msg_ready,
  output log_msg_t                     msg_data,
  // runtime port
  input  logic                         host_we,
  input  logic                         host_re,
  input  host_tgt_t                    host_tgt,
  input  logic [COORD_W-1:0]           host_r,
  input  logic [COORD_W-1:0]           host_c,
  input  logic [31:0]                  host_wdata,
  output logic [31:0]                  host_rdata
);
  localparam int TAG_W = 2 * COORD_W;
  localparam int KW    = $clog2(S+1);

  // ---------------- scheduler ----------------
  logic               st_valid, st_first, pf_valid, win_end, hist_en;
  logic [LBL_W-1:0]   st_lbl;
  logic [COORD_W-1:0] st_r, st_c0, pf_r, pf_c;
  logic [KW-1:0]      pf_k;
  logic [ITER_W-1:0]  iter;

  spe_scheduler #(.S(S), .COORD_W(COORD_W), .ITER_W(ITER_W)) u_sched (
    .clk, .rst_n, .cfg_w, .cfg_h, .cfg_num_labels, .cfg_num_iters, .cfg_hist_start,
    .start, .hold, .all_idle,
    .st_valid, .st_lbl, .st_first, .st_r, .st_c0,
    .pf_valid, .pf_k, .pf_r, .pf_c, .win_end,
    .phase_black, .hist_en, .busy, .done, .stalled, .flushing, .iter
  );

  // ---------------- memories ----------------
  logic [LBL_W-1:0]          s1_data;
  logic [S-1:0][LBL_W-1:0]   s2_bank;
  logic [S-1:0][3:0]         s2_src;
  logic [S-1:0][$clog2(S)-1:0] s2_bsel;
  logic [3:0][LBL_W-1:0]     lm_bank;
  logic [ADDR_W-1:0]         pf_addr, host_addr;

  assign pf_addr   = ADDR_W'(pf_r * cfg_w + pf_c);
  assign host_addr = ADDR_W'(host_r * cfg_w + host_c);

  s1mem #(.RVS(RVS)) u_s1 (
    .clk, .rd_en(pf_valid), .rd_addr(pf_addr), .rd_data(s1_data),
    .wr_en(host_we && host_tgt == TGT_S1), .wr_addr(host_addr), .wr_data(host_wdata[LBL_W-1:0])
  );

  s2mem #(.S(S), .RVS(RVS)) u_s2 (
    .clk, .rst_n, .cfg_w, .cfg_h,
    .rd_en(st_valid), .rd_lbl(st_lbl), .rd_r(st_r), .rd_c0(st_c0),
    .bank_data(s2_bank), .sel_src(s2_src), .sel_bank(s2_bsel),
    .host_we(host_we && host_tgt == TGT_S2), .host_r, .host_c, .host_wdata(host_wdata[LBL_W-1:0]),
    .lut_we(host_we && host_tgt == TGT_LUT), .lut_idx(host_c[LBL_W-1:0]),
    .lut_dr(host_wdata[15:8]), .lut_dc(host_wdata[7:0])
  );
  assign s2_out = s2_bank;

  // write-back select
  logic [S-1:0]                 wbp_valid;
  logic [S-1:0][LBL_W-1:0]      wbp_lbl;
  logic [S-1:0][TAG_W-1:0]      wbp_tag;
  logic                         wb_valid;
  logic [KW-1:0]                wb_k;
  logic [COORD_W-1:0]           wb_r, wb_c;
  logic                         lm_msg_valid, rmw_busy;
  log_msg_t                     lm_msg;
  lmem_entry_t                  lm_rdata;

  always_comb begin
    wb_valid = 1'b0; wb_k = '0;
    for (int k = S - 1; k >= 0; k--)
      if (wbp_valid[k]) begin wb_valid = 1'b1; wb_k = KW'(k); end
  end
  assign wb_r = wbp_tag[wb_k][TAG_W-1:COORD_W];
  assign wb_c = wbp_tag[wb_k][COORD_W-1:0];

  lmem #(.RVS(RVS)) u_lmem (
    .clk, .rst_n, .cfg_w, .cfg_h, .phase_black,
    .nrd_en(pf_valid), .nrd_r(pf_r), .nrd_c(pf_c), .nbr_bank_lbl(lm_bank),
    .wb_valid, .wb_r, .wb_c, .wb_lbl(wbp_lbl[wb_k]),
    .wb_addr({spe_id, ADDR_W'(wb_r * cfg_w + wb_c)}), .hist_en,
    .msg_valid(lm_msg_valid), .msg(lm_msg), .rmw_busy,
    .host_we(host_we && host_tgt == TGT_LMEM), .host_re, .host_r, .host_c,
    .host_wdata(lmem_entry_t'(host_wdata)), .host_rdata(lm_rdata)
  );
  assign lbl_out    = lm_bank;
  assign host_rdata = 32'(lm_rdata);

  // ---------------- prefetch and current registers ----------------
  logic                     st_valid_q, st_first_q, pf_valid_q, win_end_q;
  logic [KW-1:0]            pf_k_q;
  logic [COORD_W-1:0]       pf_r_q, pf_c_q;
  logic [3:0][LBL_W-1:0]    sw_nbr;
  logic [3:0]               sw_vld;

  label_switch #(.COORD_W(COORD_W)) u_lsw (
    .r(pf_r_q), .c(pf_c_q), .cfg_w, .cfg_h, .at_edge,
    .local_in(lm_bank), .nbr_in(lbl_in), .nbr(sw_nbr), .nbr_vld(sw_vld)
  );

  logic [S-1:0][3:0][LBL_W-1:0] pre_nbr, cur_nbr;
  logic [S-1:0][3:0]            pre_vld, cur_vld;
  logic [S-1:0][LBL_W-1:0]      pre_d1,  cur_d1;
  logic [S-1:0][TAG_W-1:0]      pre_tag, cur_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_valid_q <= 1'b0; st_first_q <= 1'b0; pf_valid_q <= 1'b0; win_end_q <= 1'b0;
      pf_k_q <= '0; pf_r_q <= '0; pf_c_q <= '0;
      pre_nbr <= '0; pre_vld <= '0; pre_d1 <= '0; pre_tag <= '0;
      cur_nbr <= '0; cur_vld <= '0; cur_d1 <= '0; cur_tag <= '0;
    end else begin
      st_valid_q <= st_valid; st_first_q <= st_first;
      pf_valid_q <= pf_valid; win_end_q <= win_end;
      pf_k_q <= pf_k; pf_r_q <= pf_r; pf_c_q <= pf_c;
      if (pf_valid_q) begin
        pre_nbr[pf_k_q] <= sw_nbr;
        pre_vld[pf_k_q] <= sw_vld;
        pre_d1[pf_k_q]  <= s1_data;
        pre_tag[pf_k_q] <= {pf_r_q, pf_c_q};
      end
      if (win_end_q) begin
        cur_nbr <= pre_nbr; cur_vld <= pre_vld; cur_d1 <= pre_d1; cur_tag <= pre_tag;
      end
    end
  end

  // ---------------- S2 switches and SPUs ----------------
  logic [8:0][S-1:0][LBL_W-1:0] s2_all;
  logic [S-1:0]                 spu_valid, spu_busy;
  logic [S-1:0][LBL_W-1:0]      spu_lbl;
  logic [S-1:0][TAG_W-1:0]      spu_tag;

  always_comb begin
    s2_all    = s2_in;
    s2_all[4] = s2_bank;
  end

  for (genvar k = 0; k < S; k++) begin : g_spu
    logic [LBL_W-1:0] d2;
    s2_switch #(.S(S)) u_s2sw (.bank_in(s2_all), .sel_src(s2_src[k]), .sel_bank(s2_bsel[k]), .d2(d2));
    spu #(.TAG_W(TAG_W), .SEED(SEED ^ 19'(k * 19'h2B3C7))) u_spu (
      .clk, .rst_n, .cfg_num_labels, .cfg_alpha, .cfg_beta, .cfg_t_lut,
      .in_valid(st_valid_q), .in_first(st_first_q), .in_d1(cur_d1[k]), .in_d2(d2),
      .in_nbr(cur_nbr[k]), .in_nbr_vld(cur_vld[k]), .in_tag(cur_tag[k]),
      .out_valid(spu_valid[k]), .out_lbl(spu_lbl[k]), .out_tag(spu_tag[k]), .busy(spu_busy[k])
    );
  end

  // ---------------- write-back staging ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbp_valid <= '0; wbp_lbl <= '0; wbp_tag <= '0;
    end else begin
      if (wb_valid) wbp_valid[wb_k] <= 1'b0;
      for (int k = 0; k < S; k++)
        if (spu_valid[k]) begin
          wbp_valid[k] <= 1'b1; wbp_lbl[k] <= spu_lbl[k]; wbp_tag[k] <= spu_tag[k];
        end
    end
  end

  // ---------------- log message queue ----------------
  localparam int FAW = $clog2(FIFO_DEPTH);
  logic [FAW:0] fifo_count;
  logic [MSG_W-1:0] fifo_dout;
  msg_fifo #(.W(MSG_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(lm_msg_valid), .din(lm_msg), .out_valid(msg_valid), .out_ready(msg_ready),
    .dout(fifo_dout), .count(fifo_count)
  );
  assign msg_data = log_msg_t'(fifo_dout);
  // room for every RV that may still be in flight once the scheduler stops
  assign msg_afull = fifo_count > (FAW+1)'(FIFO_DEPTH - 6 * S - 4);

  assign pipe_idle = !(|spu_busy) && !(|wbp_valid) && !rmw_busy && !st_valid_q;

  // write-backs from one group are drained before the next group finishes
  assert property (@(posedge clk) disable iff (!rst_n) (|spu_valid) |-> !(|(wbp_valid & ~(S'(1) << wb_k))));
endmodule
