// Energy of one label for one RV (first SPU stage, combinational).
//   E(l) = alpha * |d1 - d2(l)| + beta * sum over existing neighbours |l - n_i|
// saturated to 8 bits. The equation form and the 6-bit inputs / 8-bit energy
// follow the source; the singleton and neighbourhood distance functions
// (absolute differences) and the 4-bit alpha/beta are this design's choice,
// since the source leaves them application specific.
module spu_energy
  import mrf_pkg::*;
(
  input  logic [LBL_W-1:0]      lbl,
  input  logic [LBL_W-1:0]      d1,
  input  logic [LBL_W-1:0]      d2,
  input  logic [3:0][LBL_W-1:0] nbr,
  input  logic [3:0]            nbr_vld,
  input  logic [COEF_W-1:0]     alpha,
  input  logic [COEF_W-1:0]     beta,
  output logic [E_W-1:0]        energy
);
  logic [LBL_W-1:0]  e_s;
  logic [E_W-1:0]    e_n;
  logic [13:0]       total;
  always_comb begin
    e_s = (d1 > d2) ? d1 - d2 : d2 - d1;
    e_n = '0;
    for (int i = 0; i < 4; i++)
      if (nbr_vld[i])
        e_n = e_n + {2'b00, (lbl > nbr[i]) ? lbl - nbr[i] : nbr[i] - lbl};
    total  = 14'(alpha) * 14'(e_s) + 14'(beta) * 14'(e_n);
    energy = (total > 14'(255)) ? E_W'(255) : total[E_W-1:0];
  end
endmodule
