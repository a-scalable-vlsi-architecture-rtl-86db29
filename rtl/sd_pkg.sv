// sd_pkg: shared constants and arithmetic helpers of the soft-input soft-output
// single tree-search sphere decoder.
// Fixed-point formats follow the 4x4 16-QAM word lengths of the design
// ([integer.fractional], the integer part taken to include the sign bit):
//   y~_i  [6.7]  -> 13 bit signed, R_ij [4.7] -> 11 bit signed,
//   L^A, L^E [9.5] -> 14 bit signed, metrics M_C/M_A/M_P [9.6] -> 15 bit unsigned.
// The all-ones metric is reserved as "infinity" (no hypothesis found yet);
// metric sums saturate one below it. These two conventions are this design's own.
package sd_pkg;
  localparam int MT_DEF   = 4;   // transmit antennas = tree levels
  localparam int Q_DEF    = 4;   // bits per symbol (16-QAM)
  localparam int WY       = 13;  // y~ word length  [6.7]
  localparam int WR       = 11;  // R word length   [4.7]
  localparam int FR       = 7;   // fractional bits of y~ and R
  localparam int WLA      = 14;  // L^A word length [9.5]
  localparam int WLE      = 14;  // L^E word length [9.5]
  localparam int WM       = 15;  // metric word length [9.6]
  localparam int FM       = 6;   // fractional bits of metrics
  localparam int WB       = WY + 6; // internal width of y~_i - sum R_ij s_j
  localparam logic [WM-1:0] M_INF = '1;          // "no hypothesis yet"
  localparam logic [WM-1:0] M_SAT = M_INF - 1'b1; // largest finite metric

  // saturating sum of two finite-or-infinite metrics
  function automatic logic [WM-1:0] m_add(input logic [WM-1:0] a, input logic [WM-1:0] b);
    logic [WM:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s > {1'b0, M_SAT}) ? M_SAT : s[WM-1:0];
  endfunction

  // |L^A| (frac 5) in metric units (frac 6), saturated
  function automatic logic [WM-1:0] la_abs_m(input logic signed [WLA-1:0] la);
    logic [WLA:0] a;
    a = la[WLA-1] ? {1'b0, -la} : {1'b0, la};
    a = a << 1;
    return (a > (WLA+1)'(M_SAT)) ? M_SAT : WM'(a);
  endfunction

  // PAM amplitude 2p-(2^qh-1) of a row/column index p
  function automatic int pam_amp(input int p, input int qh);
    return 2 * p - ((1 << qh) - 1);
  endfunction
endpackage
