// sd_pref_siblings: preferred-siblings cache (unit 5), M_T-1 entries, one for each
// level a step down can leave (levels 1..M_T-1, level 0 being the leaves).
// The pruning check of a node runs in the same cycle as the computation of both
// its first child and its next sibling; when the child is taken, the sibling is
// written here so that a later step up finds a ready node without a lost cycle.
// Write: 'wr_en' stores the sibling (position, label, M_P, sibling bound) for
// wr_lvl with valid = wr_valid, and invalidates level wr_lvl-1 (stale from an
// earlier parent). Read: combinationally, the nearest valid entry above
// 'cur_lvl' (pop_ok, pop_lvl, pop_node); 'pop_en' invalidates that entry.
// The write-time invalidation and the nearest-valid search are this design's
// own way of walking up several levels in one cycle.
module sd_pref_siblings
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF,
  parameter int Q  = Q_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr_all,
  input  logic                  wr_en,
  input  logic [$clog2(MT)-1:0] wr_lvl,
  input  logic                  wr_valid,
  input  logic [Q-1:0]          wr_pos,
  input  logic [Q-1:0]          wr_label,
  input  logic [WM-1:0]         wr_mp,
  input  logic [WM-1:0]         wr_msib,
  input  logic [$clog2(MT)-1:0] cur_lvl,
  input  logic                  pop_en,
  output logic                  pop_ok,
  output logic [$clog2(MT)-1:0] pop_lvl,
  output logic [Q-1:0]          pop_pos,
  output logic [Q-1:0]          pop_label,
  output logic [WM-1:0]         pop_mp,
  output logic [WM-1:0]         pop_msib
);
  logic          v    [MT];   // entry 0 is never written
  logic [Q-1:0]  pos  [MT];
  logic [Q-1:0]  lab  [MT];
  logic [WM-1:0] mp   [MT];
  logic [WM-1:0] msib [MT];

  always_comb begin
    pop_ok = 1'b0;
    pop_lvl = '0;
    for (int l = MT - 1; l > 0; l--)
      if (l > int'(cur_lvl) && v[l]) begin pop_ok = 1'b1; pop_lvl = l[$clog2(MT)-1:0]; end
    pop_pos   = pos[pop_lvl];
    pop_label = lab[pop_lvl];
    pop_mp    = mp[pop_lvl];
    pop_msib  = msib[pop_lvl];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < MT; l++) begin
        v[l] <= 1'b0; pos[l] <= '0; lab[l] <= '0; mp[l] <= '0; msib[l] <= '0;
      end
    end else if (clr_all) begin
      for (int l = 0; l < MT; l++) v[l] <= 1'b0;
    end else begin
      if (pop_en && pop_ok) v[pop_lvl] <= 1'b0;
      if (wr_en && wr_lvl != '0) begin
        v[wr_lvl]    <= wr_valid;
        pos[wr_lvl]  <= wr_pos;
        lab[wr_lvl]  <= wr_label;
        mp[wr_lvl]   <= wr_mp;
        msib[wr_lvl] <= wr_msib;
        v[wr_lvl - 1'b1] <= 1'b0;
      end
    end
  end
endmodule
