// sd_apriori_minsearch: masked 2^Q:1 minimum search M_A,min (unit 9). Among the
// a priori bit vectors d whose symbol is not yet enumerated it returns the one with
// the smallest M_A and that metric; ties go to the lowest d.
// How: M_A(d) = sum over the set bits b of d of |L^A_b|, so inside a tuple of the
// 2^T vectors that share all bits except the lowest T (T = 3 for 16-QAM, an
// 8-tuple) the order of the metrics does not depend on the tuple: comparing
// M_A(base+t) with M_A(base+u) reduces to comparing the |L^A| sums of the bits
// only t has and only u has. Those are entries 1..2^T-1 of the table, and the
// pairs that can occur (two single bits, or one bit against the sum of two) give
// only six comparators for T = 3, shared by all tuples and working in parallel.
// A bit vector contained in another one never loses. From these comparator bits
// and the enumerated-nodes mask each tuple picks its winner without comparing
// metrics (one one-hot selection, one 2^T:1 multiplexer); only the tuple
// winners go through compare-select units (one for 16-QAM). This follows the
// architecture's first-three-levels optimisation; the tie rule is this design's.
// The reduction relies on the table being additive: if sums saturate, the
// result is still an unmasked entry with the saturated (equal) metric.
// Interface: ma[d] (d indexes the bit vector relative to the L^A signs),
// mask[d] = 1 for an enumerated vector. Combinational.
module sd_apriori_minsearch
  import sd_pkg::*;
#(
  parameter int Q = Q_DEF
) (
  input  logic [WM-1:0] ma   [2**Q],
  input  logic [2**Q-1:0] mask,     // 1 = already enumerated
  output logic [Q-1:0]  d_min,
  output logic [WM-1:0] ma_min,
  output logic          valid
);
  localparam int T  = (Q >= 3) ? 3 : Q;  // bits resolved inside a tuple
  localparam int NL = 2 ** T;            // tuple size
  localparam int NT = 2 ** (Q - T);      // number of tuples

  // shared comparators between disjoint non-empty bit subsets a < b of the tuple
  logic cmp_lt [NL][NL];  // sum(a) <  sum(b)
  logic cmp_eq [NL][NL];  // sum(a) == sum(b)
  // beats[t][u]: inside any tuple, entry t is preferred over entry u
  logic beats  [NL][NL];
  logic [T-1:0]  tsel   [NT];
  logic          tvalid [NT];

  always_comb begin
    for (int a = 0; a < NL; a++)
      for (int b = 0; b < NL; b++) begin
        cmp_lt[a][b] = 1'b0;
        cmp_eq[a][b] = 1'b0;
        if (a != 0 && b != 0 && a < b && (a & b) == 0) begin
          cmp_lt[a][b] = ma[a] < ma[b];
          cmp_eq[a][b] = ma[a] == ma[b];
        end
      end
  end

  always_comb begin
    for (int t = 0; t < NL; t++)
      for (int u = 0; u < NL; u++) begin
        int oa, ob;
        oa = t & ~u;   // bits only t has
        ob = u & ~t;   // bits only u has
        if (t == u)       beats[t][u] = 1'b0;
        else if (oa == 0) beats[t][u] = 1'b1;   // t's bits are a subset of u's
        else if (ob == 0) beats[t][u] = 1'b0;
        else if (oa < ob) beats[t][u] = cmp_lt[oa][ob] || (cmp_eq[oa][ob] && t < u);
        else              beats[t][u] = !(cmp_lt[ob][oa] || cmp_eq[ob][oa]) || (cmp_eq[ob][oa] && t < u);
      end
  end

  // per-tuple winner from comparator bits and flags only
  always_comb begin
    for (int k = 0; k < NT; k++) begin
      tsel[k]   = '0;
      tvalid[k] = 1'b0;
      for (int t = 0; t < NL; t++) begin
        logic win;
        win = !mask[k*NL + t];
        for (int u = 0; u < NL; u++)
          if (u != t && !mask[k*NL + u] && !beats[t][u]) win = 1'b0;
        if (win) tsel[k] = T'(t);
        tvalid[k] = tvalid[k] || !mask[k*NL + t];
      end
    end
  end

  // compare-select over the tuple winners (lower tuple index wins ties)
  always_comb begin
    d_min  = '0;
    ma_min = M_INF;
    valid  = 1'b0;
    for (int k = 0; k < NT; k++) begin
      logic [Q-1:0] dk;
      dk = Q'(k * NL) | Q'(tsel[k]);
      if (tvalid[k] && (!valid || ma[dk] < ma_min)) begin
        d_min  = dk;
        ma_min = ma[dk];
        valid  = 1'b1;
      end
    end
  end
endmodule
