// Label memory (LMem) of one SPE: the black half (BMem) and the white half
// (WMem), each split into four banks following the checkerboard banking
// drawing (mrf_pkg::lbl_bank), so that the four neighbours of any RV lie in
// four different banks of the other colour and are read in one cycle.
//
// Each word is an lmem_entry_t: the current label (MRP) with its counter and
// one older label (LRP) with its counter. The neighbour value sent to the
// switches is the MRP label. Writing a new label is a read-modify-write
// (lmem_update) that may emit one log message toward DRAM.
//
// Ports and timing
//   nrd_*  : neighbour read for the RV at (r,c) of the colour being updated.
//            Tile coordinates wrap at the tile edge: the same wrapped word is
//            read in every SPE in lockstep, so a switch can take an edge
//            neighbour from the adjacent SPE's output. nbr_bank_lbl[b] is the
//            MRP label read from bank b of the other colour, one cycle later.
//   wb_*   : write of a sampled label; read in the cycle it is presented,
//            updated and written the next cycle; msg_valid/msg follow one
//            cycle after that. One write per cycle.
//   host_* : runtime load and read-back (read data one cycle after host_re),
//            used only while the SPE is idle.
// Bank word index: ((r>>2)*(w>>2) + (c>>2))*2 + r[1]; tile width and height
// must be multiples of 4. Every bank has one read and one write port; during a
// phase the read port of the colour being updated serves the read-modify-write
// and that of the other colour serves neighbour reads. Bank addressing and the
// port arrangement are this design's choices.
module lmem
  import mrf_pkg::*;
#(
  parameter int RVS     = 16384,          // RVs per SPE
  parameter int COORD_W = $clog2(RVS),
  parameter int IDX_W   = $clog2(RVS / 8)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [COORD_W-1:0]     cfg_w,
  input  logic [COORD_W-1:0]     cfg_h,
  input  logic                   phase_black,    // 1: black RVs are being updated
  // neighbour read
  input  logic                   nrd_en,
  input  logic [COORD_W-1:0]     nrd_r,
  input  logic [COORD_W-1:0]     nrd_c,
  output logic [3:0][LBL_W-1:0]  nbr_bank_lbl,
  // write-back of a sampled label
  input  logic                   wb_valid,
  input  logic [COORD_W-1:0]     wb_r,
  input  logic [COORD_W-1:0]     wb_c,
  input  logic [LBL_W-1:0]       wb_lbl,
  input  logic [MSG_ADDR_W-1:0]  wb_addr,        // global RV address for the log
  input  logic                   hist_en,
  output logic                   msg_valid,
  output log_msg_t               msg,
  output logic                   rmw_busy,
  // runtime port
  input  logic                   host_we,
  input  logic                   host_re,
  input  logic [COORD_W-1:0]     host_r,
  input  logic [COORD_W-1:0]     host_c,
  input  lmem_entry_t            host_wdata,
  output lmem_entry_t            host_rdata
);
  localparam int DEPTH = RVS / 8;

  function automatic logic [IDX_W-1:0] word_idx(input logic [COORD_W-1:0] r,
                                                input logic [COORD_W-1:0] c,
                                                input logic [COORD_W-1:0] w);
    logic [2*COORD_W-1:0] lin;
    lin = (2*COORD_W)'(r >> 2) * (2*COORD_W)'(w >> 2) + (2*COORD_W)'(c >> 2);
    return IDX_W'({lin, r[1]});
  endfunction

  // ---------------- neighbour addresses ----------------
  logic [3:0][COORD_W-1:0] nr, nc;
  logic [3:0][1:0]         nb;
  logic [3:0][IDX_W-1:0]   ni;
  always_comb begin
    nr[DIR_UP]    = (nrd_r == '0) ? cfg_h - 1'b1 : nrd_r - 1'b1;  nc[DIR_UP]    = nrd_c;
    nr[DIR_DOWN]  = (nrd_r == cfg_h - 1'b1) ? '0 : nrd_r + 1'b1;  nc[DIR_DOWN]  = nrd_c;
    nr[DIR_LEFT]  = nrd_r;  nc[DIR_LEFT]  = (nrd_c == '0) ? cfg_w - 1'b1 : nrd_c - 1'b1;
    nr[DIR_RIGHT] = nrd_r;  nc[DIR_RIGHT] = (nrd_c == cfg_w - 1'b1) ? '0 : nrd_c + 1'b1;
    for (int d = 0; d < 4; d++) begin
      nb[d] = lbl_bank(nr[d][1:0], nc[d][1:0]);
      ni[d] = word_idx(nr[d], nc[d], cfg_w);
    end
  end

  // ---------------- read-modify-write pipeline ----------------
  logic [1:0]             wb_bank;
  logic                   wb_col;                   // colour of the written RV
  assign wb_bank = lbl_bank(wb_r[1:0], wb_c[1:0]);
  assign wb_col  = wb_r[0] ^ wb_c[0];

  logic                   s1_valid;
  logic [2:0]             s1_bank;                  // {colour, bank}
  logic [IDX_W-1:0]       s1_idx;
  logic [LBL_W-1:0]       s1_lbl;
  logic [MSG_ADDR_W-1:0]  s1_addr;
  logic                   s1_hist;

  logic [1:0]             h_bank;
  logic                   h_col;
  logic [IDX_W-1:0]       h_idx;
  logic [2:0]             h_sel_q;
  assign h_bank = lbl_bank(host_r[1:0], host_c[1:0]);
  assign h_col  = host_r[0] ^ host_c[0];
  assign h_idx  = word_idx(host_r, host_c, cfg_w);

  // ---------------- the eight banks ----------------
  lmem_entry_t rdata [8];
  lmem_entry_t upd;
  logic        upd_msg_valid;
  log_msg_t    upd_msg;

  lmem_update u_upd (
    .cur(rdata[s1_bank]), .new_lbl(s1_lbl), .hist_en(s1_hist), .addr(s1_addr),
    .nxt(upd), .msg_valid(upd_msg_valid), .msg(upd_msg)
  );

  for (genvar g = 0; g < 8; g++) begin : g_bank
    localparam logic       COL  = 1'(g / 4);        // 1 = black
    localparam logic [1:0] BANK = 2'(g % 4);
    logic             re, we;
    logic [IDX_W-1:0] ra, wa;
    lmem_entry_t      wd;
    lmem_entry_t      mem [DEPTH];
    always_comb begin
      re = 1'b0; ra = '0;
      if (host_re) begin
        re = (h_col == COL) && (h_bank == BANK); ra = h_idx;
      end else if (COL == phase_black) begin
        re = wb_valid && (wb_col == COL) && (wb_bank == BANK); ra = word_idx(wb_r, wb_c, cfg_w);
      end else begin
        for (int d = 0; d < 4; d++)
          if (nrd_en && nb[d] == BANK) begin re = 1'b1; ra = ni[d]; end
      end
      we = 1'b0; wa = '0; wd = '0;
      if (host_we) begin
        we = (h_col == COL) && (h_bank == BANK); wa = h_idx; wd = host_wdata;
      end else if (s1_valid && s1_bank == 3'(g)) begin
        we = 1'b1; wa = s1_idx; wd = upd;
      end
    end
    always_ff @(posedge clk) begin
      if (re) rdata[g] <= mem[ra];
      if (we) mem[wa] <= wd;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_bank <= '0; s1_idx <= '0; s1_lbl <= '0; s1_addr <= '0; s1_hist <= 1'b0;
      msg_valid <= 1'b0; msg <= '0; h_sel_q <= '0;
    end else begin
      s1_valid  <= wb_valid && !host_re;
      s1_bank   <= {wb_col, wb_bank};
      s1_idx    <= word_idx(wb_r, wb_c, cfg_w);
      s1_lbl    <= wb_lbl;
      s1_addr   <= wb_addr;
      s1_hist   <= hist_en;
      msg_valid <= s1_valid && upd_msg_valid;
      msg       <= upd_msg;
      if (host_re) h_sel_q <= {h_col, h_bank};
    end
  end

  always_comb
    for (int b = 0; b < 4; b++)
      nbr_bank_lbl[b] = rdata[{~phase_black, 2'(b)}].mrp_lbl;

  assign host_rdata = rdata[h_sel_q];
  assign rmw_busy   = s1_valid || msg_valid;

  // a write-back always targets the colour being updated
  assert property (@(posedge clk) disable iff (!rst_n) wb_valid |-> (wb_col == phase_black));
endmodule
