// sd_mp_history: M_P history (unit 4). Stores the partial metric M_P(s^(i)) of
// the path node on every level and implements the recursion
// M_P(s^(i)) = M_P(s^(i+1)) + M_P(s_i): it forms the first child's metric from
// the current node's, and the next sibling's metric and sibling pruning bound
// from the parent's (0 above the root). 'wr_en' (a step down) records cur_mp for
// cur_lvl; 'clr_all' clears. Additions saturate. Register write next cycle,
// everything else combinational.
module sd_mp_history
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr_all,
  input  logic                  wr_en,
  input  logic                  root,        // no parent: the first child of the root
  input  logic [$clog2(MT)-1:0] cur_lvl,
  input  logic [WM-1:0]         cur_mp,
  input  logic [WM-1:0]         child_inc,
  input  logic [WM-1:0]         child_bnd_inc,
  input  logic [WM-1:0]         sib_inc,
  input  logic [WM-1:0]         sib_bnd_inc,
  output logic [WM-1:0]         child_mp,
  output logic [WM-1:0]         child_bnd,
  output logic [WM-1:0]         sib_mp,
  output logic [WM-1:0]         sib_bnd
);
  logic [WM-1:0] hist [MT];
  logic [WM-1:0] parent, base;
  always_comb begin
    parent    = (int'(cur_lvl) == MT - 1) ? '0 : hist[cur_lvl + 1'b1];
    base      = root ? '0 : cur_mp;
    child_mp  = m_add(base, child_inc);
    child_bnd = m_add(base, child_bnd_inc);
    sib_mp    = m_add(parent, sib_inc);
    sib_bnd   = m_add(parent, sib_bnd_inc);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int l = 0; l < MT; l++) hist[l] <= '0;
    else if (clr_all) for (int l = 0; l < MT; l++) hist[l] <= '0;
    else if (wr_en) hist[cur_lvl] <= cur_mp;
  end
endmodule
