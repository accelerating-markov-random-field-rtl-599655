// Read-modify-write rule of the label memory (combinational), as given by the
// source's algorithm for a memory of two label+counter pairs per RV with a
// least-recently-picked replacement policy:
//   new = MRP label: count+1; if the count was saturated, log {addr,MRP,MAX}
//                    and restart the count at 1.
//   new = LRP label: LRP becomes MRP with count+1 (or 1 after logging a
//                    saturated count); the old MRP becomes LRP.
//   otherwise      : log {addr,LRP,count}, the new label becomes MRP with count 1,
//                    the old MRP becomes LRP.
// Additions of this design: while histogram collection is off (warm-up) the
// new label only becomes MRP with both counts cleared and nothing is logged;
// an eviction whose count is zero carries no histogram information and is not
// logged.
module lmem_update
  import mrf_pkg::*;
(
  input  lmem_entry_t           cur,
  input  logic [LBL_W-1:0]      new_lbl,
  input  logic                  hist_en,
  input  logic [MSG_ADDR_W-1:0] addr,
  output lmem_entry_t           nxt,
  output logic                  msg_valid,
  output log_msg_t              msg
);
  always_comb begin
    nxt       = cur;
    nxt.unused0 = '0;
    nxt.unused1 = '0;
    msg_valid = 1'b0;
    msg       = '{addr: addr, lbl: cur.lrp_lbl, cnt: cur.lrp_cnt};
    if (!hist_en) begin
      nxt.mrp_lbl = new_lbl;
      nxt.mrp_cnt = '0;
      nxt.lrp_lbl = cur.mrp_lbl;
      nxt.lrp_cnt = '0;
    end else if (new_lbl == cur.mrp_lbl) begin
      if (cur.mrp_cnt == CNT_MAX) begin
        msg_valid   = 1'b1;
        msg.lbl     = cur.mrp_lbl;
        msg.cnt     = CNT_MAX;
        nxt.mrp_cnt = CNT_W'(1);
      end else begin
        nxt.mrp_cnt = cur.mrp_cnt + CNT_W'(1);
      end
    end else if (new_lbl == cur.lrp_lbl) begin
      nxt.mrp_lbl = cur.lrp_lbl;
      nxt.lrp_lbl = cur.mrp_lbl;
      nxt.lrp_cnt = cur.mrp_cnt;
      if (cur.lrp_cnt == CNT_MAX) begin
        msg_valid   = 1'b1;
        msg.lbl     = cur.lrp_lbl;
        msg.cnt     = CNT_MAX;
        nxt.mrp_cnt = CNT_W'(1);
      end else begin
        nxt.mrp_cnt = cur.lrp_cnt + CNT_W'(1);
      end
    end else begin
      msg_valid   = (cur.lrp_cnt != '0);
      nxt.mrp_lbl = new_lbl;
      nxt.mrp_cnt = CNT_W'(1);
      nxt.lrp_lbl = cur.mrp_lbl;
      nxt.lrp_cnt = cur.mrp_cnt;
    end
  end
endmodule
