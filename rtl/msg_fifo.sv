// First-in first-out queue for log messages, with a valid/ready read side and
// an occupancy count (used for the almost-full stall of the schedulers).
// A push into a full queue is a design error and is flagged by an assertion.
// DEPTH must be a power of two. Plain register array; this design's own.
module msg_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 64,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] dout,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic          pop;

  assign out_valid = (count != '0);
  assign pop       = out_valid && out_ready;
  assign dout      = mem[rp];

  always_ff @(posedge clk) if (push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> (count != (AW+1)'(DEPTH) || pop));
endmodule
