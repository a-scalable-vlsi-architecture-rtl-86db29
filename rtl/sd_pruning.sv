// sd_pruning: pruning criteria, MAP and counter-hypothesis bookkeeping (unit 3).
// Holds, per bit (i,b), the counter-hypothesis metric lam_bar (smallest M_P seen
// for a leaf whose bit differs from the MAP bit, kept a posteriori, i.e. with the
// a priori term included), the MAP metric lambda^MAP and the MAP label bits.
// Pruning radius per bit: lam_bar clipped as the extrinsic metric
//   Lambda = lam_bar - L^A x^MAP, Lambda_clp = max{lambda-Lmax, min{lambda+Lmax, Lambda}},
// radius = Lambda_clp + L^A x^MAP  (x = +1 for label bit 0, -1 for label bit 1).
// The two criteria are computed as parallel comparators M >= radius per bit,
// masked by the bit sets and AND-combined (no maximum search):
//   step-down check (node at level j with M_P(s^(j))): set {i<j} U {i>=j, bit != MAP}
//   sibling check  (sibling bound M_sibl):              set {i<=j} U {i>j, bit != MAP}
// A leaf that is not pruned updates: M_P < lambda^MAP -> new MAP, bits that changed
// take min{lam_bar, lambda^MAP_old}; otherwise bits differing from the MAP take
// min{lam_bar, M_P}. Output L^E = (Lambda_clp - lambda^MAP) x^MAP in [9.5].
// Timing: decisions combinational in the examining cycle, updates next cycle.
module sd_pruning
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF,
  parameter int Q  = Q_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr_all,
  input  logic                  examine,      // a node is checked this cycle
  input  logic [$clog2(MT)-1:0] lvl,
  input  logic [Q-1:0]          label,        // label of the examined node
  input  logic [Q-1:0]          path_label [MT], // labels of its ancestors (i > lvl)
  input  logic [WM-1:0]         mp,           // M_P(s^(lvl))
  input  logic [WM-1:0]         msib,         // sibling pruning metric
  input  logic signed [WLA-1:0] la [MT][Q],
  input  logic [WM-1:0]         lmax,         // N0*Lmax, metric format
  output logic                  prune_down,
  output logic                  stop_sib,
  output logic                  leaf_upd,     // leaf accepted (counter-hyp. update)
  output logic                  new_map,      // leaf became the new MAP
  output logic signed [WLE-1:0] le [MT][Q],
  output logic [Q-1:0]          map_label [MT],
  output logic [WM-1:0]         lam_map
);
  localparam int WS = WM + 4;
  logic [WM-1:0] lam_bar [MT][Q];
  logic [WM-1:0] radius  [MT][Q];
  logic [Q-1:0]  plab    [MT];
  logic          leaf;

  function automatic logic signed [WS-1:0] clampv(input logic signed [WS-1:0] v,
      input logic signed [WS-1:0] lo, input logic signed [WS-1:0] hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

  always_comb begin
    for (int i = 0; i < MT; i++) begin
      plab[i] = (i == int'(lvl)) ? label : path_label[i];
      for (int b = 0; b < Q; b++) begin
        logic signed [WS-1:0] lax, ext, lo, hi, r, e;
        lax = WS'(la[i][b]) <<< 1;                 // L^A in metric format
        if (map_label[i][b]) lax = -lax;           // L^A * x^MAP
        lo  = WS'(lam_map) - WS'(lmax);
        hi  = WS'(lam_map) + WS'(lmax);
        ext = (lam_bar[i][b] == M_INF) ? hi : WS'(lam_bar[i][b]) - lax;
        ext = clampv(ext, lo, hi);
        r   = ext + lax;
        if (lam_map == M_INF) radius[i][b] = M_INF;
        else radius[i][b] = (r < 0) ? '0 : ((r > WS'(M_SAT)) ? M_SAT : WM'(r));
        e = ext - WS'(lam_map);                    // Lambda_clp - lambda^MAP
        if (map_label[i][b]) e = -e;
        e = e >>> 1;                               // to [9.5]
        if (lam_map == M_INF) le[i][b] = '0;
        else le[i][b] = WLE'(clampv(e, -(WS'(1) <<< (WLE-1)) + 1, (WS'(1) <<< (WLE-1)) - 1));
      end
    end
    prune_down = 1'b1;
    stop_sib   = 1'b1;
    for (int i = 0; i < MT; i++)
      for (int b = 0; b < Q; b++) begin
        logic diff;
        diff = plab[i][b] != map_label[i][b];
        if ((i < int'(lvl) || diff) && !(mp >= radius[i][b])) prune_down = 1'b0;
        if ((i <= int'(lvl) || diff) && !(msib >= radius[i][b])) stop_sib = 1'b0;
      end
    leaf     = (lvl == '0);
    leaf_upd = examine && leaf && !prune_down;
    new_map  = leaf_upd && (mp < lam_map);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lam_map <= M_INF;
      for (int i = 0; i < MT; i++) begin
        map_label[i] <= '0;
        for (int b = 0; b < Q; b++) lam_bar[i][b] <= M_INF;
      end
    end else if (clr_all) begin
      lam_map <= M_INF;
      for (int i = 0; i < MT; i++) begin
        map_label[i] <= '0;
        for (int b = 0; b < Q; b++) lam_bar[i][b] <= M_INF;
      end
    end else if (leaf_upd) begin
      if (new_map) begin
        lam_map <= mp;
        for (int i = 0; i < MT; i++) begin
          map_label[i] <= plab[i];
          for (int b = 0; b < Q; b++)
            if (plab[i][b] != map_label[i][b] && lam_map < lam_bar[i][b])
              lam_bar[i][b] <= lam_map;
        end
      end else begin
        for (int i = 0; i < MT; i++)
          for (int b = 0; b < Q; b++)
            if (plab[i][b] != map_label[i][b] && mp < lam_bar[i][b])
              lam_bar[i][b] <= mp;
      end
    end
  end
endmodule
