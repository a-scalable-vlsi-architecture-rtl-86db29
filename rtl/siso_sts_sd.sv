// siso_sts_sd: soft-input soft-output single tree-search sphere decoder, top level.
// Solves max-log MAP MIMO demapping for an M_T x M_T spatial-multiplexing system
// with 2^Q-QAM: given the QR-decomposed channel (R, y~ = Q^H y, normalised by N0)
// and a priori LLRs L^A from the channel decoder, it searches the 2^Q-ary tree of
// M_T levels depth-first and returns the extrinsic LLRs L^E of all M_T*Q bits,
// clipped to +-Lmax, plus the MAP label and metric.
// Structure (units of the block diagram): input registers, STS control FSM,
// channel enumeration for vertical steps (1), hybrid enumeration for horizontal
// steps (2) with column zig-zag (6), a priori metrics (8) and masked a priori
// minimum search (9), pruning criteria (3), M_P history (4), preferred-siblings
// cache (5), enumerated-nodes flags (7), programmable mapper/demapper.
// Interface: pulse 'start' while not busy with the inputs valid; 'done' pulses
// when le/map_label/lam_map hold the result, n_en the number of examined nodes.
// One node is examined per clock cycle; start-to-done latency is n_en + 3 cycles.
// The mapper/demapper can be rewritten between searches through lut_*.
// Parameters: MT antennas, Q bits per symbol (even), SOFT_IN selects the
// soft-input build (default) or a soft-output-only build that ignores la.
// Following the architecture: the unit partition, one node per cycle, hybrid
// enumeration, the two pruning criteria and clipping, the word lengths and the
// run-time mapper/demapper. This design's own choices: the control sequence
// (one cycle to load, one to build the a priori table), the start/done
// handshake, the LUT write port, tie rules and the integer symbol grid.
module siso_sts_sd
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF,
  parameter int Q  = Q_DEF,
  parameter bit SOFT_IN = 1'b1  // 0: soft-output-only build, L^A ignored
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic signed [WY-1:0]  y_re   [MT],
  input  logic signed [WY-1:0]  y_im   [MT],
  input  logic signed [WR-1:0]  r_re   [MT][MT],
  input  logic signed [WR-1:0]  r_im   [MT][MT],
  input  logic signed [WLA-1:0] la     [MT][Q],
  input  logic [WM-1:0]         lmax,
  input  logic                  lut_we,
  input  logic                  lut_sel,
  input  logic [Q-1:0]          lut_addr,
  input  logic [Q-1:0]          lut_data,
  output logic                  busy,
  output logic                  done,
  output logic signed [WLE-1:0] le     [MT][Q],
  output logic [Q-1:0]          map_label [MT],
  output logic [WM-1:0]         lam_map,
  output logic [31:0]           n_en
);
  localparam int LW = $clog2(MT);
  logic signed [WY-1:0]  yr_q [MT], yi_q [MT];
  logic signed [WR-1:0]  rr_q [MT][MT], ri_q [MT][MT];
  logic signed [WLA-1:0] la_q [MT][Q];
  logic signed [WLA-1:0] la_in [MT][Q];
  logic [Q-1:0]          sgn  [MT];
  logic [WM-1:0]         ma_tab [MT][2**Q];
  logic [Q-1:0]          map_tab [2**Q], demap_tab [2**Q];
  logic [2**Q-1:0]       flags [MT];

  logic load_in, load_tab, clr_all, root, examine;
  logic [LW-1:0] cur_lvl, v_lvl, pop_lvl;
  logic [Q-1:0]  cur_pos, cur_label, path_pos [MT], path_label [MT];
  logic [WM-1:0] cur_mp, cur_msib;
  logic signed [WB-1:0] cen_re, cen_im, v_c_re, v_c_im;
  logic [Q-1:0]  v_pos, v_label, h_pos, h_label, pop_pos, pop_label;
  logic [WM-1:0] v_inc, v_binc, h_inc, h_binc, v_mp, v_bnd, h_mp, h_bnd, pop_mp, pop_msib;
  logic          v_apri, h_apri, h_valid, prune_down, stop_sib, leaf_upd, new_map, pop_ok;
  logic          step_down, step_sib, step_up, cache_valid;

  // build switch for soft-input support: without it the a priori inputs are
  // constant zero, so the a priori table, its minimum search and the a priori
  // terms of the pruning radius reduce to constants in synthesis
  always_comb
    for (int i = 0; i < MT; i++)
      for (int b = 0; b < Q; b++)
        la_in[i][b] = SOFT_IN ? la[i][b] : '0;

  sd_input_regs #(.MT(MT), .Q(Q)) u_in (
    .clk, .rst_n, .load(load_in),
    .y_re_i(y_re), .y_im_i(y_im), .r_re_i(r_re), .r_im_i(r_im), .la_i(la_in),
    .y_re(yr_q), .y_im(yi_q), .r_re(rr_q), .r_im(ri_q), .la(la_q), .la_sgn(sgn));

  sd_symbol_lut #(.Q(Q)) u_lut (
    .clk, .rst_n, .lut_we(lut_we && !busy), .lut_sel, .lut_addr, .lut_data,
    .map_tab, .demap_tab);

  sd_apriori_metrics #(.MT(MT), .Q(Q)) u_ma (
    .clk, .rst_n, .load(load_tab), .la(la_q), .ma_tab);

  sd_sts_ctrl #(.MT(MT), .Q(Q)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .load_in, .load_tab, .clr_all, .root, .examine,
    .cur_lvl, .cur_pos, .cur_label, .cur_mp, .cur_msib, .path_pos, .path_label,
    .v_lvl, .cen_re, .cen_im, .v_c_re, .v_c_im, .v_pos, .v_label, .v_mp, .v_bnd,
    .h_valid, .h_pos, .h_label, .h_mp, .h_bnd, .prune_down, .stop_sib,
    .pop_ok, .pop_lvl, .pop_pos, .pop_label, .pop_mp, .pop_msib,
    .step_down, .step_sib, .step_up, .cache_valid, .n_en);

  sd_vertical_enum #(.MT(MT), .Q(Q)) u_vert (
    .level(v_lvl), .path_pos, .y_re(yr_q), .y_im(yi_q), .r_re(rr_q), .r_im(ri_q),
    .la_sgn(sgn), .ma_tab, .map_tab, .demap_tab,
    .c_re(v_c_re), .c_im(v_c_im), .child_pos(v_pos), .child_label(v_label),
    .child_inc(v_inc), .bound_inc(v_binc), .chose_apriori(v_apri));

  sd_horizontal_enum #(.Q(Q)) u_horz (
    .c_re(cen_re), .c_im(cen_im), .rii(rr_q[cur_lvl][cur_lvl]), .flags(flags[cur_lvl]),
    .ma_lvl(ma_tab[cur_lvl]), .la_sgn(sgn[cur_lvl]), .map_tab, .demap_tab,
    .sib_pos(h_pos), .sib_label(h_label), .sib_inc(h_inc), .bound_inc(h_binc),
    .valid(h_valid), .chose_apriori(h_apri));

  sd_mp_history #(.MT(MT)) u_hist (
    .clk, .rst_n, .clr_all, .wr_en(step_down), .root, .cur_lvl, .cur_mp,
    .child_inc(v_inc), .child_bnd_inc(v_binc), .sib_inc(h_inc), .sib_bnd_inc(h_binc),
    .child_mp(v_mp), .child_bnd(v_bnd), .sib_mp(h_mp), .sib_bnd(h_bnd));

  sd_enum_flags #(.MT(MT), .Q(Q)) u_flags (
    .clk, .rst_n, .clr_all,
    .init_en(root || step_down), .init_lvl(v_lvl), .init_pos(v_pos),
    .set_en(step_sib || (step_down && cache_valid)), .set_lvl(cur_lvl), .set_pos(h_pos),
    .flags);

  sd_pref_siblings #(.MT(MT), .Q(Q)) u_cache (
    .clk, .rst_n, .clr_all, .wr_en(step_down), .wr_lvl(cur_lvl), .wr_valid(cache_valid),
    .wr_pos(h_pos), .wr_label(h_label), .wr_mp(h_mp), .wr_msib(h_bnd),
    .cur_lvl, .pop_en(step_up), .pop_ok, .pop_lvl, .pop_pos, .pop_label, .pop_mp, .pop_msib);

  sd_pruning #(.MT(MT), .Q(Q)) u_prune (
    .clk, .rst_n, .clr_all, .examine, .lvl(cur_lvl), .label(cur_label),
    .path_label, .mp(cur_mp), .msib(cur_msib), .la(la_q), .lmax,
    .prune_down, .stop_sib, .leaf_upd, .new_map, .le, .map_label, .lam_map);
endmodule
