// sd_horizontal_enum: hybrid enumeration of the next sibling (unit 2 with the
// column zig-zag units 6 and the a priori minimum search 9).
// Channel side: every column unit picks its best remaining row for the quantised
// imaginary part of the level's centre; M_C is computed per column and the
// smallest gives s_C^(k); its label (demapper D) gives M_A(s_C^(k)).
// A priori side: the flags are re-indexed by a priori bit vector d (through the
// mapper M), M_A,min gives s_A^(k) and the mapper gives the point for its M_C.
// The sibling is the candidate with the smaller M_P = M_C + M_A (ties: channel).
// bound_inc = M_C(s_C^(k)) + M_A(s_A^(k)) is the increment of the re-defined
// sibling pruning metric. 'flags' must already contain every node enumerated on
// this level, including the current one. Combinational.
module sd_horizontal_enum
  import sd_pkg::*;
#(
  parameter int Q = Q_DEF
) (
  input  logic signed [WB-1:0] c_re,
  input  logic signed [WB-1:0] c_im,
  input  logic signed [WR-1:0] rii,
  input  logic [2**Q-1:0]      flags,       // indexed by position {col,row}
  input  logic [WM-1:0]        ma_lvl [2**Q],
  input  logic [Q-1:0]         la_sgn,
  input  logic [Q-1:0]         map_tab   [2**Q],
  input  logic [Q-1:0]         demap_tab [2**Q],
  output logic [Q-1:0]         sib_pos,
  output logic [Q-1:0]         sib_label,
  output logic [WM-1:0]        sib_inc,
  output logic [WM-1:0]        bound_inc,
  output logic                 valid,       // some node of the level is left
  output logic                 chose_apriori
);
  localparam int QH = Q / 2;
  localparam int NC = 2 ** QH;
  logic [QH-1:0] qr;
  logic          up_r;
  logic [QH-1:0] best_row [NC];
  logic          col_ok   [NC];
  logic [WM-1:0] mc_col   [NC];
  logic [2**Q-1:0] mask_d;
  logic [Q-1:0]  d_a, pos_a, pos_c, lab_c, lab_a;
  logic [WM-1:0] ma_a, mc_a, mc_c, ma_c, mp_c, mp_a;
  logic          va, vc;

  sd_slicer #(.QH(QH)) u_q_im (.v(c_im), .rii(rii), .idx(qr), .upper(up_r));

  for (genvar c = 0; c < NC; c++) begin : g_col
    sd_col_zigzag #(.QH(QH)) u_zz (
      .row_flags(flags[c*NC +: NC]), .q_row(qr), .upper(up_r),
      .best_row(best_row[c]), .valid(col_ok[c]));
    sd_mc_metric #(.QH(QH)) u_mc (.b_re(c_re), .b_im(c_im), .rii(rii),
      .col(QH'(c)), .row(best_row[c]), .mc(mc_col[c]));
  end

  always_comb begin
    vc = 1'b0; pos_c = '0; mc_c = M_INF;
    for (int c = 0; c < NC; c++)
      if (col_ok[c] && (!vc || mc_col[c] < mc_c)) begin
        vc = 1'b1; mc_c = mc_col[c]; pos_c = {QH'(c), best_row[c]};
      end
    for (int d = 0; d < 2**Q; d++) mask_d[d] = flags[map_tab[Q'(d) ^ la_sgn]];
  end

  sd_apriori_minsearch #(.Q(Q)) u_min (.ma(ma_lvl), .mask(mask_d), .d_min(d_a),
    .ma_min(ma_a), .valid(va));

  assign lab_a = d_a ^ la_sgn;
  assign pos_a = map_tab[lab_a];
  assign lab_c = demap_tab[pos_c];
  assign ma_c  = ma_lvl[lab_c ^ la_sgn];

  sd_mc_metric #(.QH(QH)) u_mc_a (.b_re(c_re), .b_im(c_im), .rii(rii),
    .col(pos_a[Q-1:QH]), .row(pos_a[QH-1:0]), .mc(mc_a));

  always_comb begin
    mp_c      = m_add(mc_c, ma_c);
    mp_a      = m_add(mc_a, ma_a);
    bound_inc = m_add(mc_c, ma_a);
    valid     = vc;
    if (mp_c <= mp_a) begin
      sib_pos = pos_c; sib_label = lab_c; sib_inc = mp_c; chose_apriori = 1'b0;
    end else begin
      sib_pos = pos_a; sib_label = lab_a; sib_inc = mp_a; chose_apriori = 1'b1;
    end
  end
endmodule
