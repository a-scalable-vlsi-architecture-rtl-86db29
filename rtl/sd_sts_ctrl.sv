// sd_sts_ctrl: STS control FSM. Runs the depth-first single tree search at one
// examined node per cycle. It holds the node under examination (level, position,
// label, M_P, sibling pruning metric), the symbols of its ancestors and the
// channel centre b_i of every level.
// Each SEARCH cycle the pruning unit checks the current node while the channel
// enumeration computes its first child and the hybrid enumeration its next
// sibling; the FSM then takes exactly one of:
//   step down  (not a leaf, step-down criterion fails): child becomes current,
//              sibling goes to the preferred-siblings cache (valid only if the
//              sibling criterion fails and a node is left on the level);
//   sibling    (sibling criterion fails, a node is left): sibling becomes current;
//   step up    otherwise: nearest valid cached sibling above becomes current;
//              none left -> search done.
// States: IDLE -> TAB (input registers valid, a priori table computed, search state
// cleared) -> ROOT (first child of the root) -> SEARCH -> IDLE with 'done' for one
// cycle. Latency = examined nodes + 3 cycles from 'start'. The state encoding and
// the 3-cycle preamble are this design's own.
module sd_sts_ctrl
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF,
  parameter int Q  = Q_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  load_in,      // capture inputs
  output logic                  load_tab,     // compute a priori table
  output logic                  clr_all,      // clear search state
  output logic                  root,
  output logic                  examine,
  // current node
  output logic [$clog2(MT)-1:0] cur_lvl,
  output logic [Q-1:0]          cur_pos,
  output logic [Q-1:0]          cur_label,
  output logic [WM-1:0]         cur_mp,
  output logic [WM-1:0]         cur_msib,
  output logic [Q-1:0]          path_pos   [MT],  // ancestors, current node at cur_lvl
  output logic [Q-1:0]          path_label [MT],
  output logic [$clog2(MT)-1:0] v_lvl,        // target level of the vertical step
  output logic signed [WB-1:0]  cen_re,       // centre of the current level
  output logic signed [WB-1:0]  cen_im,
  // vertical step results
  input  logic signed [WB-1:0]  v_c_re,
  input  logic signed [WB-1:0]  v_c_im,
  input  logic [Q-1:0]          v_pos,
  input  logic [Q-1:0]          v_label,
  input  logic [WM-1:0]         v_mp,
  input  logic [WM-1:0]         v_bnd,
  // horizontal step results
  input  logic                  h_valid,
  input  logic [Q-1:0]          h_pos,
  input  logic [Q-1:0]          h_label,
  input  logic [WM-1:0]         h_mp,
  input  logic [WM-1:0]         h_bnd,
  // pruning
  input  logic                  prune_down,
  input  logic                  stop_sib,
  // preferred-siblings cache
  input  logic                  pop_ok,
  input  logic [$clog2(MT)-1:0] pop_lvl,
  input  logic [Q-1:0]          pop_pos,
  input  logic [Q-1:0]          pop_label,
  input  logic [WM-1:0]         pop_mp,
  input  logic [WM-1:0]         pop_msib,
  output logic                  step_down,
  output logic                  step_sib,
  output logic                  step_up,
  output logic                  cache_valid,
  output logic [31:0]           n_en          // examined nodes of the last search
);
  typedef enum logic [2:0] {S_IDLE, S_TAB, S_ROOT, S_SEARCH} state_t;
  state_t state;
  logic [Q-1:0]         anc_pos [MT];
  logic [Q-1:0]         anc_lab [MT];
  logic signed [WB-1:0] cre [MT];
  logic signed [WB-1:0] cim [MT];
  logic                 leaf;

  always_comb begin
    busy     = state != S_IDLE;
    load_in  = state == S_IDLE && start;
    load_tab = state == S_TAB;
    clr_all  = state == S_TAB;
    root     = state == S_ROOT;
    examine  = state == S_SEARCH;
    v_lvl    = root ? $clog2(MT)'(MT - 1) : cur_lvl - 1'b1;
    for (int i = 0; i < MT; i++) begin
      path_pos[i]   = (i == int'(cur_lvl)) ? cur_pos   : anc_pos[i];
      path_label[i] = (i == int'(cur_lvl)) ? cur_label : anc_lab[i];
    end
    cen_re      = cre[cur_lvl];
    cen_im      = cim[cur_lvl];
    leaf        = cur_lvl == '0;
    step_down   = examine && !leaf && !prune_down;
    step_sib    = examine && !step_down && !stop_sib && h_valid;
    step_up     = examine && !step_down && !step_sib;
    cache_valid = !stop_sib && h_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; n_en <= '0;
      cur_lvl <= '0; cur_pos <= '0; cur_label <= '0; cur_mp <= '0; cur_msib <= '0;
      for (int i = 0; i < MT; i++) begin
        anc_pos[i] <= '0; anc_lab[i] <= '0; cre[i] <= '0; cim[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) state <= S_TAB;
        S_TAB:   begin state <= S_ROOT; n_en <= '0; end
        S_ROOT: begin
          cur_lvl <= v_lvl; cur_pos <= v_pos; cur_label <= v_label;
          cur_mp  <= v_mp;  cur_msib <= v_bnd;
          cre[v_lvl] <= v_c_re; cim[v_lvl] <= v_c_im;
          state <= S_SEARCH;
        end
        S_SEARCH: begin
          n_en <= n_en + 1;
          if (step_down) begin
            anc_pos[cur_lvl] <= cur_pos; anc_lab[cur_lvl] <= cur_label;
            cur_lvl <= v_lvl; cur_pos <= v_pos; cur_label <= v_label;
            cur_mp  <= v_mp;  cur_msib <= v_bnd;
            cre[v_lvl] <= v_c_re; cim[v_lvl] <= v_c_im;
          end else if (step_sib) begin
            cur_pos <= h_pos; cur_label <= h_label; cur_mp <= h_mp; cur_msib <= h_bnd;
          end else if (pop_ok) begin
            cur_lvl <= pop_lvl; cur_pos <= pop_pos; cur_label <= pop_label;
            cur_mp  <= pop_mp;  cur_msib <= pop_msib;
          end else begin
            state <= S_IDLE; done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
