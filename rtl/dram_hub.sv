// DRAM hub: merges the log messages of four sources (four SPEs of a 2x2
// region, or four hubs of the level below) into one stream toward the DRAM
// interface. Traffic only flows toward DRAM. Sources are served round-robin,
// one message per cycle, through a one-entry output register; the
// valid/ready handshake (a message moves when both are high, and a raised
// valid holds its data until accepted) and the arbitration are this design's
// choices, the four-to-one tree node follows the source.
module dram_hub
  import mrf_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic     [3:0]      in_valid,
  output logic     [3:0]      in_ready,
  input  log_msg_t [3:0]      in_msg,
  output logic                out_valid,
  input  logic                out_ready,
  output log_msg_t            out_msg
);
  logic [1:0] ptr, gnt;
  logic       any, take;

  always_comb begin
    any = 1'b0; gnt = ptr;
    for (int i = 3; i >= 0; i--)
      if (in_valid[2'(ptr + 2'(i))]) begin any = 1'b1; gnt = 2'(ptr + 2'(i)); end
  end

  assign take     = any && (!out_valid || out_ready);
  always_comb begin
    in_ready = '0;
    in_ready[gnt] = take;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; out_valid <= 1'b0; out_msg <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_msg   <= in_msg[gnt];
        ptr       <= gnt + 2'd1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> (out_valid && $stable(out_msg)));
endmodule
