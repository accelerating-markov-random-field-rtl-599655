// Stochastic Processing Unit: Gibbs sampling of one RV every L cycles.
//
// Input: for each RV, L consecutive valid cycles, one per label l = 0..L-1
// (in_first marks l = 0). d1, the four neighbour labels, their existence mask
// and the tag are held constant for the RV; d2 is the singleton 2 value of
// label l. Output: out_valid for one cycle with the sampled label and the tag.
//
// Three stages, each L cycles long, joined by ping-pong buffers as in the
// source's drawing (the "E FIFO" holding RVs v and v+1, the "CDF FIFO" holding
// v and v-1):
//   A  energy E(l) of each label (spu_energy), written to the E buffer while the
//      running minimum Emin is tracked;
//   B  E_s = E - Emin (dynamic scaling), P_tr from the threshold table
//      (spu_e2p), cumulative sum written to the CDF buffer;
//   C  inverse-transform sampling: threshold = (rnd12 * total) >> 12 with rnd12
//      the 12 LSBs of a 19-bit LFSR stepped once per RV; the label is the first
//      l whose cumulative value exceeds the threshold.
// Throughput one RV per L cycles; out_valid is set by the clock edge 3*L+1
// edges after the edge that takes the RV's first label. Requires L >= 2. The stage structure and widths
// follow the source; the per-RV LFSR step and the threshold-times-total
// scaling of the random number are this design's choices.
module spu
  import mrf_pkg::*;
#(
  parameter int          TAG_W = 16,
  parameter logic [18:0] SEED  = 19'h5A5A5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration (static during a run)
  input  logic [6:0]            cfg_num_labels,   // L, 2..64
  input  logic [COEF_W-1:0]     cfg_alpha,
  input  logic [COEF_W-1:0]     cfg_beta,
  input  logic [31:0]           cfg_t_lut,        // T update word, see spu_e2p
  // label stream
  input  logic                  in_valid,
  input  logic                  in_first,
  input  logic [LBL_W-1:0]      in_d1,
  input  logic [LBL_W-1:0]      in_d2,
  input  logic [3:0][LBL_W-1:0] in_nbr,
  input  logic [3:0]            in_nbr_vld,
  input  logic [TAG_W-1:0]      in_tag,
  // result
  output logic                  out_valid,
  output logic [LBL_W-1:0]      out_lbl,
  output logic [TAG_W-1:0]      out_tag,
  output logic                  busy
);
  localparam int LA_W = 6;

  // ---------------- stage A: energy ----------------
  logic [E_W-1:0]  ebuf [2][MAX_LABELS];
  logic            a_sel;
  logic [LA_W-1:0] a_lbl;
  logic [E_W-1:0]  a_emin;
  logic [E_W-1:0]  a_energy;
  logic [LA_W-1:0] a_idx;
  logic            a_last;

  assign a_idx  = in_first ? '0 : a_lbl;
  assign a_last = in_valid && (7'(a_idx) == cfg_num_labels - 7'd1);

  spu_energy u_energy (
    .lbl(a_idx), .d1(in_d1), .d2(in_d2), .nbr(in_nbr), .nbr_vld(in_nbr_vld),
    .alpha(cfg_alpha), .beta(cfg_beta), .energy(a_energy)
  );

  // hand-over registers A -> B
  logic            b_go;
  logic            b_sel;
  logic [E_W-1:0]  b_emin;
  logic [TAG_W-1:0] b_tag;

  always_ff @(posedge clk) begin
    if (in_valid) ebuf[a_sel][a_idx] <= a_energy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_sel <= 1'b0; a_lbl <= '0; a_emin <= '1;
      b_go <= 1'b0; b_sel <= 1'b0; b_emin <= '0; b_tag <= '0;
    end else begin
      b_go <= 1'b0;
      if (in_valid) begin
        a_lbl  <= a_idx + LA_W'(1);
        a_emin <= (in_first || a_energy < a_emin) ? a_energy : a_emin;
        if (a_last) begin
          b_go   <= 1'b1;
          b_sel  <= a_sel;
          b_emin <= (in_first || a_energy < a_emin) ? a_energy : a_emin;
          b_tag  <= in_tag;
          a_sel  <= ~a_sel;
        end
      end
    end
  end

  // ---------------- stage B: scaling, probability, CDF ----------------
  logic [CDF_W-1:0] cbuf [2][MAX_LABELS];
  logic             b_act;
  logic [LA_W-1:0]  b_lbl;
  logic [E_W-1:0]   b_emin_q;
  logic [TAG_W-1:0] b_tag_q;
  logic             b_rsel;
  logic [CDF_W-1:0] b_cum;
  logic             c_wsel;
  logic [E_W-1:0]   b_es;
  logic [P_W-1:0]   b_p;
  logic [CDF_W-1:0] b_cum_next;
  logic             b_last;

  assign b_es       = ebuf[b_rsel][b_lbl] - b_emin_q;
  assign b_cum_next = b_cum + CDF_W'(b_p);
  assign b_last     = b_act && (7'(b_lbl) == cfg_num_labels - 7'd1);

  spu_e2p u_e2p (.es(b_es), .t_lut(cfg_t_lut), .p_tr(b_p));

  always_ff @(posedge clk) begin
    if (b_act) cbuf[c_wsel][b_lbl] <= b_cum_next;
  end

  // hand-over registers B -> C
  logic             c_go;
  logic             c_sel;
  logic [CDF_W-1:0] c_total;
  logic [TAG_W-1:0] c_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_act <= 1'b0; b_lbl <= '0; b_emin_q <= '0; b_tag_q <= '0; b_rsel <= 1'b0;
      b_cum <= '0; c_wsel <= 1'b0;
      c_go <= 1'b0; c_sel <= 1'b0; c_total <= '0; c_tag <= '0;
    end else begin
      c_go <= 1'b0;
      if (b_act) begin
        b_lbl <= b_lbl + LA_W'(1);
        b_cum <= b_cum_next;
        if (b_last) begin
          b_act   <= 1'b0;
          c_go    <= 1'b1;
          c_sel   <= c_wsel;
          c_total <= b_cum_next;
          c_tag   <= b_tag_q;
          c_wsel  <= ~c_wsel;
        end
      end
      if (b_go) begin           // a new RV always arrives after the previous one finished
        b_act    <= 1'b1;
        b_lbl    <= '0;
        b_cum    <= '0;
        b_emin_q <= b_emin;
        b_tag_q  <= b_tag;
        b_rsel   <= b_sel;
      end
    end
  end

  // ---------------- stage C: discrete sampler ----------------
  logic [18:0]      rnd;
  logic             c_act;
  logic [LA_W-1:0]  c_lbl;
  logic             c_rsel;
  logic [CDF_W-1:0] c_thr;
  logic [TAG_W-1:0] c_tag_q;
  logic             c_found;
  logic [LBL_W-1:0] c_pick;
  logic             c_hit;
  logic [21:0]      c_prod;

  lfsr19 #(.SEED(SEED)) u_rng (.clk(clk), .rst_n(rst_n), .step(c_go), .rnd(rnd));

  assign c_prod = rnd[11:0] * c_total;
  assign c_hit  = cbuf[c_rsel][c_lbl] > c_thr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_act <= 1'b0; c_lbl <= '0; c_rsel <= 1'b0; c_thr <= '0; c_tag_q <= '0;
      c_found <= 1'b0; c_pick <= '0;
      out_valid <= 1'b0; out_lbl <= '0; out_tag <= '0;
    end else begin
      out_valid <= 1'b0;
      if (c_act) begin
        c_lbl <= c_lbl + LA_W'(1);
        if (!c_found && c_hit) begin
          c_found <= 1'b1;
          c_pick  <= c_lbl;
        end
        if (7'(c_lbl) == cfg_num_labels - 7'd1) begin
          c_act     <= 1'b0;
          out_valid <= 1'b1;
          out_lbl   <= c_found ? c_pick : c_lbl;
          out_tag   <= c_tag_q;
        end
      end
      if (c_go) begin
        c_act   <= 1'b1;
        c_lbl   <= '0;
        c_rsel  <= c_sel;
        c_thr   <= c_prod[21:12];
        c_tag_q <= c_tag;
        c_found <= 1'b0;
      end
    end
  end

  // stage A is mid-RV when it has accepted some labels but not the last one
  logic a_mid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        a_mid <= 1'b0;
    else if (in_valid) a_mid <= !a_last;
  end

  assign busy = a_mid || b_go || b_act || c_go || c_act || out_valid;

  // labels of an RV arrive back to back
  property p_stream;
    @(posedge clk) disable iff (!rst_n) (in_valid && !a_last) |=> (in_valid && !in_first);
  endproperty
  assert property (p_stream);
endmodule
