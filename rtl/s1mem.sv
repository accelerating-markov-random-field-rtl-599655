// Singleton 1 memory of one SPE: one 6-bit value per RV (e.g. the pixel's own
// grey level), read once per RV. Read-only during a run; loaded by the runtime
// through the write port beforehand. Word address r*w + c; read data appears
// one cycle after rd_en. A single-port array is enough because the SPUs of an
// SPE read it in successive cycles (this design's schedule).
module s1mem
  import mrf_pkg::*;
#(
  parameter int RVS    = 16384,
  parameter int ADDR_W = $clog2(RVS)
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [LBL_W-1:0]  rd_data,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [LBL_W-1:0]  wr_data
);
  logic [LBL_W-1:0] mem [RVS];
  always_ff @(posedge clk) begin
    if (wr_en)      mem[wr_addr] <= wr_data;
    else if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
