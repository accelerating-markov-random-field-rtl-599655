// Singleton 2 switch of one SPU (combinational). Picks the SPU's singleton 2
// value from the bank outputs of this SPE or of one of its eight neighbours,
// as told by the S2Mem's region code and bank number. Region code, row-major:
// 0 upper-left, 1 up, 2 upper-right, 3 left, 4 this SPE, 5 right,
// 6 lower-left, 7 down, 8 lower-right. Inputs from SPEs outside the array are
// tied to zero by the array. The eight-neighbour singleton 2 links follow the
// source; the region code is this design's.
module s2_switch
  import mrf_pkg::*;
#(
  parameter int S = 2
) (
  input  logic [8:0][S-1:0][LBL_W-1:0] bank_in,   // [region][bank]
  input  logic [3:0]                   sel_src,
  input  logic [$clog2(S)-1:0]         sel_bank,
  output logic [LBL_W-1:0]             d2
);
  always_comb begin
    d2 = '0;
    for (int i = 0; i < 9; i++)
      if (sel_src == 4'(i)) d2 = bank_in[i][sel_bank];
  end
endmodule
