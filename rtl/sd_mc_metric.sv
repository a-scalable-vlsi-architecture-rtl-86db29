// sd_mc_metric: channel metric increment M_C(s_i) = |b_i - R_ii s_i|^2 for one
// candidate symbol, where b_i = y~_i - sum_{j>i} R_ij s_j is the level's centre.
// Metrics are normalised by N0 (the design works on N0*M), so no division occurs.
// R_ii is the real, positive diagonal of the QR decomposition (imaginary part not
// used). The candidate is given as column (real) and row (imaginary) PAM index.
// Purely combinational. The squared error (14 fractional bits) is truncated to the
// metric's 6 fractional bits and saturated; truncation is this design's choice.
module sd_mc_metric
  import sd_pkg::*;
#(
  parameter int QH = Q_DEF / 2   // bits per real dimension
) (
  input  logic signed [WB-1:0] b_re,
  input  logic signed [WB-1:0] b_im,
  input  logic signed [WR-1:0] rii,
  input  logic [QH-1:0]        col,
  input  logic [QH-1:0]        row,
  output logic [WM-1:0]        mc
);
  localparam int WE = WB + 2;
  logic signed [WE-1:0] e_re, e_im;
  logic signed [2*WE-1:0] acc;
  logic [2*WE-1:0] sq;
  always_comb begin
    e_re = WE'(b_re) - WE'(rii) * WE'(pam_amp(int'(col), QH));
    e_im = WE'(b_im) - WE'(rii) * WE'(pam_amp(int'(row), QH));
    acc  = (2*WE)'(e_re) * (2*WE)'(e_re) + (2*WE)'(e_im) * (2*WE)'(e_im);
    sq   = $unsigned(acc) >> (2 * FR - FM);
    mc   = (sq > (2*WE)'(M_SAT)) ? M_SAT : WM'(sq);
  end
endmodule
