// sd_vertical_enum: channel-based enumeration for a vertical step (unit 1).
// For the target level t it forms the centre b_t = y~_t - sum_{j>t} R_tj s_j from
// the symbols on the current path (complex products with PAM amplitudes), quantises
// it to the nearest constellation point (quantiser Q, first channel candidate
// s_C^(1)) and reads that point's label through the demapper D to get its M_A.
// In parallel the first a priori candidate is the symbol of d = 0 (all bits as
// sign(L^A) prefers, M_A = 0), found through the mapper M, whose M_C is computed.
// The candidate with the smaller M_P = M_C + M_A is the first child (ties pick the
// channel candidate). 'bound_inc' = M_C(s_C^(1)) + M_A(s_A^(1)) = M_C(s_C^(1)) is
// the increment of the re-defined sibling pruning metric.
// Combinational; path_pos holds {col,row} per level and is only read for j > t.
module sd_vertical_enum
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF,
  parameter int Q  = Q_DEF
) (
  input  logic [$clog2(MT)-1:0] level,          // target level t
  input  logic [Q-1:0]          path_pos [MT],
  input  logic signed [WY-1:0]  y_re [MT],
  input  logic signed [WY-1:0]  y_im [MT],
  input  logic signed [WR-1:0]  r_re [MT][MT],
  input  logic signed [WR-1:0]  r_im [MT][MT],
  input  logic [Q-1:0]          la_sgn [MT],
  input  logic [WM-1:0]         ma_tab [MT][2**Q],
  input  logic [Q-1:0]          map_tab   [2**Q],
  input  logic [Q-1:0]          demap_tab [2**Q],
  output logic signed [WB-1:0]  c_re,           // centre b_t
  output logic signed [WB-1:0]  c_im,
  output logic [Q-1:0]          child_pos,
  output logic [Q-1:0]          child_label,
  output logic [WM-1:0]         child_inc,      // M_P(s_t^(1))
  output logic [WM-1:0]         bound_inc,
  output logic                  chose_apriori   // child came from the a priori side
);
  localparam int QH = Q / 2;
  logic signed [WR-1:0] rii;
  logic [QH-1:0] qc, qr;
  logic          up_c, up_r;
  logic [Q-1:0]  pos_c, pos_a, lab_c, lab_a;
  logic [WM-1:0] mc_c, mc_a, ma_c, mp_c;

  logic signed [WB-1:0] acc_re, acc_im, ar, ai;
  always_comb begin
    acc_re = WB'(y_re[level]);
    acc_im = WB'(y_im[level]);
    ar = '0;
    ai = '0;
    for (int j = 0; j < MT; j++) begin
      ar = WB'(pam_amp(int'(path_pos[j][Q-1:QH]), QH));
      ai = WB'(pam_amp(int'(path_pos[j][QH-1:0]), QH));
      if (j > int'(level)) begin
        acc_re = acc_re - (WB'(r_re[level][j]) * ar - WB'(r_im[level][j]) * ai);
        acc_im = acc_im - (WB'(r_re[level][j]) * ai + WB'(r_im[level][j]) * ar);
      end
    end
  end
  assign c_re = acc_re;
  assign c_im = acc_im;
  assign rii  = r_re[level][level];

  // the side outputs only matter to the column zig-zag of horizontal steps
  sd_slicer #(.QH(QH)) u_q_re (.v(c_re), .rii(rii), .idx(qc), .upper(up_c));
  sd_slicer #(.QH(QH)) u_q_im (.v(c_im), .rii(rii), .idx(qr), .upper(up_r));

  assign pos_c = {qc, qr};
  assign lab_c = demap_tab[pos_c];
  assign lab_a = la_sgn[level];            // d = 0
  assign pos_a = map_tab[lab_a];
  assign ma_c  = ma_tab[level][lab_c ^ la_sgn[level]];

  sd_mc_metric #(.QH(QH)) u_mc_c (.b_re(c_re), .b_im(c_im), .rii(rii),
    .col(pos_c[Q-1:QH]), .row(pos_c[QH-1:0]), .mc(mc_c));
  sd_mc_metric #(.QH(QH)) u_mc_a (.b_re(c_re), .b_im(c_im), .rii(rii),
    .col(pos_a[Q-1:QH]), .row(pos_a[QH-1:0]), .mc(mc_a));

  always_comb begin
    mp_c      = m_add(mc_c, ma_c);
    bound_inc = mc_c;
    if (mp_c <= mc_a) begin
      child_pos = pos_c; child_label = lab_c; child_inc = mp_c; chose_apriori = 1'b0;
    end else begin
      child_pos = pos_a; child_label = lab_a; child_inc = mc_a; chose_apriori = 1'b1;
    end
  end
endmodule
