// DRAM interface: packs 32-bit log messages into 512-bit lines (16 messages,
// message j in bits [32j+31:32j]) and writes each full line to DRAM at the
// line address held in the on-chip log index, which then advances. The index
// is also reported to the runtime, which reads that many lines back at the
// end of a run. After flush, once no message is waiting, a partly filled
// line is written, padded with all-zero messages (count 0 marks an empty
// slot), and flush_done pulses: the log is complete. Input is accepted while
// no line waits for DRAM. Packing into 512-bit lines and the log index follow
// the source; the write handshake (dram_valid until dram_ready), message order in a line
// and padding are this design's choices.
module dram_if
  import mrf_pkg::*;
#(
  parameter int IDX_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  log_msg_t          in_msg,
  input  logic              flush,
  output logic              flush_done,
  output logic              dram_valid,
  input  logic              dram_ready,
  output logic [IDX_W-1:0]  dram_addr,
  output logic [LINE_W-1:0] dram_data,
  output logic [IDX_W-1:0]  log_index
);
  localparam int NMSG = LINE_W / MSG_W;
  logic [$clog2(NMSG):0] fill;
  logic                  flush_pend;

  assign in_ready  = !dram_valid;
  assign dram_addr = log_index;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill <= '0; dram_valid <= 1'b0; dram_data <= '0; log_index <= '0;
      flush_pend <= 1'b0; flush_done <= 1'b0;
    end else begin
      flush_done <= 1'b0;
      if (flush) flush_pend <= 1'b1;
      if (dram_valid && dram_ready) begin
        dram_valid <= 1'b0;
        dram_data  <= '0;
        fill       <= '0;
        log_index  <= log_index + 1'b1;
      end else if (!dram_valid) begin
        if (in_valid) begin
          dram_data[MSG_W*fill[$clog2(NMSG)-1:0] +: MSG_W] <= in_msg;
          fill <= fill + 1'b1;
          if (fill == ($clog2(NMSG)+1)'(NMSG - 1)) dram_valid <= 1'b1;
        end else if (flush_pend) begin
          if (fill != '0) dram_valid <= 1'b1;
          else begin
            flush_pend <= 1'b0;
            flush_done <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (dram_valid && !dram_ready) |=> (dram_valid && $stable(dram_data)));
endmodule
