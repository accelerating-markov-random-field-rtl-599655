// Energy-to-probability conversion (third SPU stage, combinational).
// The source scales P_s = 15*exp(-E_s/T) and truncates it to a power of two,
// P_tr in {0,1,2,4,8}, read from a table refreshed whenever T changes. Because
// P_tr falls monotonically with E_s, the table is held as four 8-bit energy
// thresholds packed into the 32-bit T-update word:
//   t_lut = {th1, th2, th4, th8},  th_k = floor(T * ln(15/k)) (saturated to 255)
//   P_tr = 8 if E_s <= th8, else 4 if E_s <= th4, else 2 if <= th2, else 1 if <= th1, else 0.
// The threshold encoding is this design's choice.
module spu_e2p
  import mrf_pkg::*;
(
  input  logic [E_W-1:0] es,
  input  logic [31:0]    t_lut,
  output logic [P_W-1:0] p_tr
);
  always_comb begin
    if      (es <= t_lut[7:0])   p_tr = 4'd8;
    else if (es <= t_lut[15:8])  p_tr = 4'd4;
    else if (es <= t_lut[23:16]) p_tr = 4'd2;
    else if (es <= t_lut[31:24]) p_tr = 4'd1;
    else                         p_tr = 4'd0;
  end
endmodule
