// Singleton 2 memory of one SPE with its offset table.
//
// Each cycle the S SPUs of the SPE work on the same label index l of S RVs
// that sit in one row, two columns apart (columns c0, c0+2, ...). For each SPU
// the address of its singleton 2 value is the RV position plus the table entry
// for l, a signed (row, column) offset loaded by the runtime per application
// (a 7x7 window for motion estimation, l pixels to the left for stereo).
// Banking follows the source: every two columns form one bank, S banks in
// turn, so RVs two columns apart with the same offset always hit S different
// banks and one read per bank per cycle suffices.
//
// A target outside the tile wraps to the same position in the adjacent tile
// region; the word read at the wrapped position is sent to all eight
// neighbouring SPEs, which read the same positions in lockstep. sel_src (3x3
// region code, 4 = this SPE; row-major from the upper-left neighbour) and
// sel_bank tell each SPU's switch where its value is. Offsets must be smaller
// than the tile in each direction (larger reaches need the runtime's data
// replication). Bank data and selects appear one cycle after rd_en.
// Word index in a bank: r*(w/S) + (c >> (1+log2 S))*2 + c[0]; w must be a
// multiple of 2S. S must be a power of two. Table width (8-bit signed offsets)
// and word index are this design's choices.
module s2mem
  import mrf_pkg::*;
#(
  parameter int S       = 2,
  parameter int RVS     = 16384,
  parameter int OFF_W   = 8,
  parameter int COORD_W = $clog2(RVS),
  parameter int IDX_W   = $clog2(RVS / S)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [COORD_W-1:0]          cfg_w,
  input  logic [COORD_W-1:0]          cfg_h,
  input  logic                        rd_en,
  input  logic [LBL_W-1:0]            rd_lbl,
  input  logic [COORD_W-1:0]          rd_r,
  input  logic [COORD_W-1:0]          rd_c0,
  output logic [S-1:0][LBL_W-1:0]     bank_data,
  output logic [S-1:0][3:0]           sel_src,
  output logic [S-1:0][$clog2(S)-1:0] sel_bank,
  // runtime port
  input  logic                        host_we,
  input  logic [COORD_W-1:0]          host_r,
  input  logic [COORD_W-1:0]          host_c,
  input  logic [LBL_W-1:0]            host_wdata,
  input  logic                        lut_we,
  input  logic [LBL_W-1:0]            lut_idx,
  input  logic signed [OFF_W-1:0]     lut_dr,
  input  logic signed [OFF_W-1:0]     lut_dc
);
  localparam int SB = $clog2(S);
  localparam int SW = COORD_W + 2;   // signed working width

  logic signed [OFF_W-1:0] lut_r [MAX_LABELS];
  logic signed [OFF_W-1:0] lut_c [MAX_LABELS];

  always_ff @(posedge clk) begin
    if (lut_we) begin
      lut_r[lut_idx] <= lut_dr;
      lut_c[lut_idx] <= lut_dc;
    end
  end

  function automatic logic [IDX_W-1:0] word_idx(input logic [COORD_W-1:0] r,
                                                input logic [COORD_W-1:0] c,
                                                input logic [COORD_W-1:0] w);
    logic [2*COORD_W-1:0] lin;
    lin = (2*COORD_W)'(r) * (2*COORD_W)'(w >> SB)
        + (2*COORD_W)'((c >> (SB + 1)) << 1) + (2*COORD_W)'(c[0]);
    return IDX_W'(lin);
  endfunction

  // per-SPU target address
  logic [S-1:0][COORD_W-1:0] tr, tc;
  logic [S-1:0][SB-1:0]      tb;
  logic [S-1:0][IDX_W-1:0]   ti;
  logic [S-1:0][3:0]         tsrc;
  logic signed [SW-1:0]      hh, ww;
  assign hh = SW'(cfg_h);
  assign ww = SW'(cfg_w);
  always_comb begin
    for (int k = 0; k < S; k++) begin
      logic signed [SW-1:0] rr, cc;
      logic [1:0]           rreg, creg;     // 0: before, 1: inside, 2: after the tile
      rr = SW'(rd_r) + SW'(lut_r[rd_lbl]);
      cc = SW'(rd_c0) + SW'(2 * k) + SW'(lut_c[rd_lbl]);
      if (rr < 0)        begin rreg = 2'd0; rr = rr + hh; end
      else if (rr >= hh) begin rreg = 2'd2; rr = rr - hh; end
      else               rreg = 2'd1;
      if (cc < 0)        begin creg = 2'd0; cc = cc + ww; end
      else if (cc >= ww) begin creg = 2'd2; cc = cc - ww; end
      else               creg = 2'd1;
      tr[k]   = COORD_W'(rr);
      tc[k]   = COORD_W'(cc);
      tb[k]   = tc[k][SB:1];
      ti[k]   = word_idx(tr[k], tc[k], cfg_w);
      tsrc[k] = 4'(rreg) * 4'd3 + 4'(creg);
    end
  end

  // banks
  logic [IDX_W-1:0] h_idx;
  assign h_idx = word_idx(host_r, host_c, cfg_w);
  for (genvar b = 0; b < S; b++) begin : g_bank
    logic             re;
    logic [IDX_W-1:0] ra;
    logic [LBL_W-1:0] mem [RVS / S];
    always_comb begin
      re = 1'b0; ra = '0;
      for (int k = 0; k < S; k++)
        if (rd_en && tb[k] == SB'(b)) begin re = 1'b1; ra = ti[k]; end
    end
    always_ff @(posedge clk) begin
      if (host_we && host_c[SB:1] == SB'(b)) mem[h_idx] <= host_wdata;
      else if (re)                           bank_data[b] <= mem[ra];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_src  <= '0;
      sel_bank <= '0;
    end else if (rd_en) begin
      sel_src  <= tsrc;
      sel_bank <= tb;
    end
  end

  // the banking guarantees one read per bank: no two SPUs pick the same bank
  for (genvar k = 1; k < S; k++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> (tb[k] != tb[0]));
  end
endmodule
