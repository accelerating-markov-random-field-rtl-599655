// Testbench of the label switch. Bank outputs of this SPE and its four
// neighbours are random; for random RV positions in random tiles the switch
// must return, for each direction, the word of the bank that holds the
// neighbour (bank numbers typed in from the banking drawing: row r%4 lists the
// banks of columns 0..3 as 1 3 2 4 / 1 4 2 3 / 2 4 1 3 / 2 3 1 4, minus one),
// from the adjacent SPE when the neighbour is across the tile edge, and clear
// the valid bit only across an edge of the whole image. It also checks that
// the four neighbours of any RV sit in four different banks.
module tb_label_switch;
  import mrf_pkg::*;
  logic [13:0] r, c, cfg_w, cfg_h;
  logic [3:0] at_edge;
  logic [3:0][LBL_W-1:0] local_in;
  logic [3:0][3:0][LBL_W-1:0] nbr_in;
  logic [3:0][LBL_W-1:0] nbr;
  logic [3:0] nbr_vld;
  label_switch #(.COORD_W(14)) dut (.*);
  int checks = 0, failures = 0;
  int tbl [4][4] = '{'{0, 2, 1, 3}, '{0, 3, 1, 2}, '{1, 3, 0, 2}, '{1, 2, 0, 3}};
  initial begin
    for (int it = 0; it < 20000; it++) begin
      int w, h, rr, cc, nr [4], nc [4], bset;
      bit xe [4];
      w = 4 * $urandom_range(1, 16); h = 4 * $urandom_range(1, 16);
      rr = $urandom_range(0, h - 1); cc = $urandom_range(0, w - 1);
      cfg_w = 14'(w); cfg_h = 14'(h); r = 14'(rr); c = 14'(cc);
      at_edge = 4'($urandom);
      local_in = {$urandom, $urandom};
      nbr_in = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      nr[DIR_UP] = rr - 1; nc[DIR_UP] = cc;     xe[DIR_UP] = (rr == 0);
      nr[DIR_DOWN] = rr + 1; nc[DIR_DOWN] = cc; xe[DIR_DOWN] = (rr == h - 1);
      nr[DIR_LEFT] = rr; nc[DIR_LEFT] = cc - 1; xe[DIR_LEFT] = (cc == 0);
      nr[DIR_RIGHT] = rr; nc[DIR_RIGHT] = cc + 1; xe[DIR_RIGHT] = (cc == w - 1);
      #1;
      bset = 0;
      for (int d = 0; d < 4; d++) begin
        int b;
        b = tbl[(nr[d] + h) % 4][(nc[d] + w) % 4];
        bset |= 1 << b;
        checks++;
        if (nbr[d] !== (xe[d] ? nbr_in[d][b] : local_in[b])) begin
          failures++; $display("FAIL: dir %0d at (%0d,%0d)", d, rr, cc);
        end
        checks++;
        if (nbr_vld[d] !== !(xe[d] && at_edge[d])) begin failures++; $display("FAIL: valid dir %0d", d); end
      end
      checks++;
      if (bset != 15) begin failures++; $display("FAIL: neighbours of (%0d,%0d) share a bank", rr, cc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
