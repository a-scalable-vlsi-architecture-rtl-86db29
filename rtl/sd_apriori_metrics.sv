// sd_apriori_metrics: a priori metric table {M_A}_i (unit 8). For every antenna i
// and every unipolar a priori bit vector d_i (bit b = 1 where the label bit
// disagrees with sign(L^A_{i,b})) it holds
//   M_A(d_i) = sum_b d_{i,b} |L^A_{i,b}|    (max-log approximation of -log P[s_i]).
// Each entry is formed from an entry with one bit fewer plus one |L^A|, so an
// antenna needs 2^Q - Q - 1 real additions, the count the design gives.
// The design shares 2^(Q-1)-1 adders over the first two enumeration steps; here
// all antennas are computed in parallel in the cycle after 'load' and registered
// (this design's simplification, one cycle of latency before the search starts).
module sd_apriori_metrics
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF,
  parameter int Q  = Q_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic signed [WLA-1:0] la     [MT][Q],
  output logic [WM-1:0]         ma_tab [MT][2**Q]
);
  logic [WM-1:0] nxt [MT][2**Q];
  logic [WM-1:0] a   [Q];
  always_comb begin
    for (int i = 0; i < MT; i++) begin
      for (int b = 0; b < Q; b++) a[b] = la_abs_m(la[i][b]);
      nxt[i][0] = '0;
      for (int d = 1; d < 2**Q; d++) begin
        int top;
        top = 0;
        for (int b = 0; b < Q; b++) if (d[b]) top = b;
        nxt[i][d] = m_add(nxt[i][d & ~(1 << top)], a[top]);
      end
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MT; i++)
        for (int d = 0; d < 2**Q; d++) ma_tab[i][d] <= '0;
    end else if (load) begin
      ma_tab <= nxt;
    end
  end
endmodule
