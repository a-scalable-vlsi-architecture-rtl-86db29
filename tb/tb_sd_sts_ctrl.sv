// tb_sd_sts_ctrl: drives the control FSM with random child/sibling/cache offers
// and random pruning decisions, and checks each cycle against a model: the
// preamble strobes (load_in, load_tab/clr_all, root), the choice among step down,
// sibling and step up, the next current node and its ancestor path, the stored
// centres, done after the cache runs dry, n_en and the n_en+3 latency.
module tb_sd_sts_ctrl;
  import sd_pkg::*;
  localparam int MT = 4, Q = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, load_in, load_tab, clr_all, root, examine;
  logic [1:0] cur_lvl, v_lvl, pop_lvl;
  logic [Q-1:0] cur_pos, cur_label, path_pos [MT], path_label [MT];
  logic [WM-1:0] cur_mp, cur_msib;
  logic signed [WB-1:0] cen_re, cen_im, v_c_re, v_c_im;
  logic [Q-1:0] v_pos, v_label, h_pos, h_label, pop_pos, pop_label;
  logic [WM-1:0] v_mp, v_bnd, h_mp, h_bnd, pop_mp, pop_msib;
  logic h_valid, prune_down, stop_sib, pop_ok;
  logic step_down, step_sib, step_up, cache_valid;
  logic [31:0] n_en;
  int checks = 0, failures = 0, nd = 0, ns = 0, nu = 0;
  sd_sts_ctrl #(.MT(MT), .Q(Q)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic offer();
    v_c_re = WB'($urandom); v_c_im = WB'($urandom); v_pos = Q'($urandom); v_label = Q'($urandom);
    v_mp = WM'($urandom); v_bnd = WM'($urandom);
    h_valid = ($urandom_range(0, 4) != 0); h_pos = Q'($urandom); h_label = Q'($urandom); h_mp = WM'($urandom); h_bnd = WM'($urandom);
    prune_down = 1'($urandom); stop_sib = 1'($urandom);
    pop_lvl = 2'($urandom_range(int'(cur_lvl) + 1 > 3 ? 3 : int'(cur_lvl) + 1, 3));
    pop_ok = ($urandom_range(0, 9) != 0) && (cur_lvl != 2'd3);
    pop_pos = Q'($urandom); pop_label = Q'($urandom); pop_mp = WM'($urandom); pop_msib = WM'($urandom);
  endtask

  initial begin
    offer();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 30; run++) begin
      int cyc, nodes; bit fin;
      int ml; int mpos, mlab; int anc [MT]; longint mc_re [MT];
      start = 1; #1;
      checks++; if (!load_in) begin failures++; $display("no load_in"); end
      @(negedge clk); start = 0; cyc = 1;
      checks++; if (!(load_tab && clr_all && busy)) begin failures++; $display("no TAB"); end
      @(negedge clk); cyc++;
      offer(); #1;
      checks++; if (!root || v_lvl != 2'd3) begin failures++; $display("no ROOT"); end
      ml = 3; mpos = v_pos; mlab = v_label; mc_re[3] = v_c_re;
      @(negedge clk); cyc++;
      nodes = 0; fin = 0;
      while (!fin) begin
        bit ed, es;
        offer(); #1;
        checks++;
        if (!examine || int'(cur_lvl) != ml || int'(cur_pos) != mpos || int'(cur_label) != mlab || longint'(cen_re) != mc_re[ml]) begin
          failures++; $display("run %0d node %0d: state mismatch", run, nodes);
        end
        ed = (ml != 0) && !prune_down;
        es = !ed && !stop_sib && h_valid;
        checks++;
        if (step_down != ed || step_sib != es || step_up != (!ed && !es) || cache_valid != (!stop_sib && h_valid)) begin
          failures++; $display("decision");
        end
        if (ed) begin
          nd++; anc[ml] = mpos; ml--; mpos = v_pos; mlab = v_label; mc_re[ml] = v_c_re;
          checks++; if (int'(v_lvl) != ml) begin failures++; $display("v_lvl"); end
        end else if (es) begin ns++; mpos = h_pos; mlab = h_label; end
        else if (pop_ok) begin nu++; ml = pop_lvl; mpos = pop_pos; mlab = pop_label; end
        else fin = 1;
        nodes++;
        @(negedge clk); cyc++;
        if (!fin) for (int i = ml + 1; i < MT; i++) begin
          checks++; if (int'(path_pos[i]) != anc[i]) begin failures++; $display("ancestor %0d", i); end
        end
        if (nodes > 5000) fin = 1;
      end
      checks++; if (!done || busy) begin failures++; $display("done"); end
      checks++; if (int'(n_en) != nodes || cyc != nodes + 3) begin failures++; $display("n_en %0d nodes %0d cycles %0d", n_en, nodes, cyc); end
      @(negedge clk);
    end
    checks++; if (nd == 0 || ns == 0 || nu == 0) begin failures++; $display("a step kind never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
