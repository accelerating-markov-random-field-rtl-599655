// 19-bit Fibonacci linear feedback shift register, the SPU's random source.
// Polynomial x^19+x^18+x^17+x^14+1 (maximal length; the polynomial itself is
// this design's choice, the 19-bit length follows the source). The register
// advances one step per asserted `step`; `rnd` is the state, of which the SPU
// uses the 12 least-significant bits. SEED must be non-zero.
module lfsr19 #(
  parameter logic [18:0] SEED = 19'h5A5A5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  output logic [18:0] rnd
);
  logic fb;
  assign fb = rnd[18] ^ rnd[17] ^ rnd[16] ^ rnd[13];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rnd <= SEED;
    else if (step) rnd <= {rnd[17:0], fb};
  end
endmodule
