// sd_slicer: quantiser Q for one real dimension. Finds the PAM index p whose
// scaled amplitude R_ii*(2p-(2^QH-1)) lies nearest to v, without dividing by R_ii:
// v is compared with the 2^QH-1 decision thresholds R_ii*(2m-2^QH+2).
// 'upper' tells on which side of the chosen point v lies (v >= R_ii*amp(p)),
// used by the column zig-zag to order equidistant rows. Combinational.
module sd_slicer
  import sd_pkg::*;
#(
  parameter int QH = Q_DEF / 2
) (
  input  logic signed [WB-1:0] v,
  input  logic signed [WR-1:0] rii,
  output logic [QH-1:0]        idx,
  output logic                 upper
);
  localparam int WE = WB + 2;
  always_comb begin
    idx = '0;
    for (int m = 0; m < (1 << QH) - 1; m++)
      if (WE'(v) >= WE'(rii) * WE'(2 * m - (1 << QH) + 2)) idx = QH'(m + 1);
    upper = WE'(v) >= WE'(rii) * WE'(pam_amp(int'(idx), QH));
  end
endmodule
