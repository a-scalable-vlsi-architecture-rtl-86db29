// sd_input_regs: input register bank of the decoder. On 'load' it captures the
// upper-triangular channel matrix R, the rotated receive vector y~ = Q^H y and the
// a priori LLRs L^A_{i,b} of one received vector, and holds them for the whole
// tree search (the search reads them every cycle). Separate real/imaginary words.
// Also outputs the sign bit of each L^A (1 = the a priori prefers bit value 1,
// i.e. x = -1), which turns labels into unipolar a priori bit vectors d_i.
// Timing: values appear one cycle after 'load'. Reset clears everything.
module sd_input_regs
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF,
  parameter int Q  = Q_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic signed [WY-1:0]  y_re_i [MT],
  input  logic signed [WY-1:0]  y_im_i [MT],
  input  logic signed [WR-1:0]  r_re_i [MT][MT],
  input  logic signed [WR-1:0]  r_im_i [MT][MT],
  input  logic signed [WLA-1:0] la_i   [MT][Q],
  output logic signed [WY-1:0]  y_re   [MT],
  output logic signed [WY-1:0]  y_im   [MT],
  output logic signed [WR-1:0]  r_re   [MT][MT],
  output logic signed [WR-1:0]  r_im   [MT][MT],
  output logic signed [WLA-1:0] la     [MT][Q],
  output logic [Q-1:0]          la_sgn [MT]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MT; i++) begin
        y_re[i] <= '0; y_im[i] <= '0;
        for (int j = 0; j < MT; j++) begin r_re[i][j] <= '0; r_im[i][j] <= '0; end
        for (int b = 0; b < Q; b++) la[i][b] <= '0;
      end
    end else if (load) begin
      y_re <= y_re_i; y_im <= y_im_i;
      r_re <= r_re_i; r_im <= r_im_i;
      la   <= la_i;
    end
  end
  always_comb
    for (int i = 0; i < MT; i++)
      for (int b = 0; b < Q; b++) la_sgn[i][b] = la[i][b][WLA-1];
endmodule
