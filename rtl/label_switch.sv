// Label switch (combinational). For the RV at tile coordinates (r,c) it
// gathers the current labels of the four neighbours from the bank outputs of
// this SPE's label memory or, where the neighbour lies across the tile edge,
// from the bank outputs of the top, bottom, left or right SPE (all SPEs read
// the same wrapped words in lockstep). Neighbours beyond the edge of the
// whole image do not exist: their valid bit is cleared and the SPU leaves them
// out of the energy. The bank of each neighbour comes from mrf_pkg::lbl_bank.
// The source draws a black and a white switch per SPU; since only one colour
// is read at a time, this design uses one switch on the other colour's banks.
module label_switch
  import mrf_pkg::*;
#(
  parameter int COORD_W = 14
) (
  input  logic [COORD_W-1:0]         r,
  input  logic [COORD_W-1:0]         c,
  input  logic [COORD_W-1:0]         cfg_w,
  input  logic [COORD_W-1:0]         cfg_h,
  input  logic [3:0]                 at_edge,   // [DIR] this SPE is on the array edge
  input  logic [3:0][LBL_W-1:0]      local_in,  // [bank]
  input  logic [3:0][3:0][LBL_W-1:0] nbr_in,    // [DIR][bank] from the adjacent SPEs
  output logic [3:0][LBL_W-1:0]      nbr,       // [DIR]
  output logic [3:0]                 nbr_vld
);
  logic [COORD_W-1:0] rm1, rp1, cm1, cp1;
  logic [3:0]         xedge;
  logic [3:0][1:0]    bank;
  always_comb begin
    rm1 = r - 1'b1; rp1 = r + 1'b1; cm1 = c - 1'b1; cp1 = c + 1'b1;
    xedge[DIR_UP]    = (r == '0);
    xedge[DIR_DOWN]  = (r == cfg_h - 1'b1);
    xedge[DIR_LEFT]  = (c == '0);
    xedge[DIR_RIGHT] = (c == cfg_w - 1'b1);
    bank[DIR_UP]     = lbl_bank(rm1[1:0], c[1:0]);
    bank[DIR_DOWN]   = lbl_bank(rp1[1:0], c[1:0]);
    bank[DIR_LEFT]   = lbl_bank(r[1:0], cm1[1:0]);
    bank[DIR_RIGHT]  = lbl_bank(r[1:0], cp1[1:0]);
    for (int d = 0; d < 4; d++) begin
      nbr[d]     = xedge[d] ? nbr_in[d][bank[d]] : local_in[bank[d]];
      nbr_vld[d] = !(xedge[d] && at_edge[d]);
    end
  end
endmodule
