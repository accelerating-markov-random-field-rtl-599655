// Shared types and constants of the MRF Gibbs-sampling accelerator.
//
// Widths that follow the source description: labels, singleton data and
// neighbour labels are 6 bits, energies 8 bits, truncated probabilities 4 bits,
// the label-memory entry is one 32-bit word holding the most-recently-picked
// (MRP) and least-recently-picked (LRP) label+count pairs with 6-bit counters,
// and a log message is {20-bit RV address, 6-bit label, 6-bit count}.
// Field order inside the packed structs (MSB first, left to right as drawn) is
// this design's choice. The 4x4 label-bank map reproduces the checkerboard
// banking drawing; the function form of it is this design's own.
package mrf_pkg;

  localparam int LBL_W      = 6;    // label / singleton data width
  localparam int MAX_LABELS = 64;   // 6-bit labels
  localparam int E_W        = 8;    // raw and scaled energy
  localparam int P_W        = 4;    // truncated probability
  localparam int CNT_W      = 6;    // histogram counter in an LMem entry
  localparam int MSG_ADDR_W = 20;   // RV address in a log message (1M RVs)
  localparam int MSG_W      = 32;
  localparam int LINE_W     = 512;  // DRAM line
  localparam int COEF_W     = 4;    // alpha, beta (assumed width)
  localparam int CDF_W      = 10;   // 64 labels * 8 = 512 fits in 10 bits

  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  // One LMem word (32 bits, two unused nibbles as in the FPGA layout).
  typedef struct packed {
    logic [LBL_W-1:0] mrp_lbl;
    logic [3:0]       unused0;
    logic [CNT_W-1:0] mrp_cnt;
    logic [LBL_W-1:0] lrp_lbl;
    logic [3:0]       unused1;
    logic [CNT_W-1:0] lrp_cnt;
  } lmem_entry_t;

  // One histogram log message: address and label form the histogram bin.
  typedef struct packed {
    logic [MSG_ADDR_W-1:0] addr;
    logic [LBL_W-1:0]      lbl;
    logic [CNT_W-1:0]      cnt;
  } log_msg_t;

  // Targets of the runtime load/read port.
  typedef enum logic [1:0] {
    TGT_S1   = 2'd0,  // singleton 1 memory
    TGT_S2   = 2'd1,  // singleton 2 memory
    TGT_LMEM = 2'd2,  // label memory entry
    TGT_LUT  = 2'd3   // singleton 2 offset table: wdata[15:8]=row offset, [7:0]=column offset
  } host_tgt_t;

  // Neighbour directions, used as array indices.
  localparam int DIR_UP = 0, DIR_DOWN = 1, DIR_LEFT = 2, DIR_RIGHT = 3;

  // Label bank (0..3) of the RV at tile coordinates whose two LSBs are r2,c2.
  // Same table for both colours; a cell's colour is (r+c) odd = black.
  // Row r of the table lists columns 0..3. Every RV's four neighbours fall in
  // four different banks of the other colour.
  function automatic logic [1:0] lbl_bank(input logic [1:0] r2, input logic [1:0] c2);
    logic [7:0] row;
    unique case (r2)
      2'd0:    row = {2'd3, 2'd1, 2'd2, 2'd0};
      2'd1:    row = {2'd2, 2'd1, 2'd3, 2'd0};
      2'd2:    row = {2'd2, 2'd0, 2'd3, 2'd1};
      default: row = {2'd3, 2'd0, 2'd2, 2'd1};
    endcase
    return row[2*c2 +: 2];
  endfunction

endpackage
