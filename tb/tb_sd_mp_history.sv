// tb_sd_mp_history: random step-down writes; checks the child metric (current
// M_P plus increment, or the increment alone at the root), and the sibling
// metric and bound formed from the parent's stored M_P (0 above the top level),
// all with saturation.
module tb_sd_mp_history;
  import sd_pkg::*;
  localparam int MT = 4;
  logic clk = 0, rst_n = 0, clr_all = 0, wr_en = 0, root = 0;
  logic [1:0] cur_lvl = 0;
  logic [WM-1:0] cur_mp = 0, child_inc = 0, child_bnd_inc = 0, sib_inc = 0, sib_bnd_inc = 0;
  logic [WM-1:0] child_mp, child_bnd, sib_mp, sib_bnd;
  int model [MT];
  int checks = 0, failures = 0;
  sd_mp_history #(.MT(MT)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int s(int a, int b); return (a + b > 32766) ? 32766 : a + b; endfunction
  initial begin
    foreach (model[l]) model[l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int par, base, big;
      big = (t % 10 == 0) ? 30000 : 2000;
      cur_lvl = 2'($urandom); root = ($urandom_range(0, 5) == 0); wr_en = 1'($urandom);
      clr_all = ($urandom_range(0, 80) == 0);
      cur_mp = WM'($urandom_range(0, big)); child_inc = WM'($urandom_range(0, big)); child_bnd_inc = WM'($urandom_range(0, big));
      sib_inc = WM'($urandom_range(0, big)); sib_bnd_inc = WM'($urandom_range(0, big));
      #1;
      par = (cur_lvl == MT - 1) ? 0 : model[cur_lvl + 1];
      base = root ? 0 : int'(cur_mp);
      checks++;
      if (int'(child_mp) != s(base, child_inc) || int'(child_bnd) != s(base, child_bnd_inc) ||
          int'(sib_mp) != s(par, sib_inc) || int'(sib_bnd) != s(par, sib_bnd_inc)) begin
        failures++; $display("t %0d mismatch", t);
      end
      @(negedge clk);
      if (clr_all) foreach (model[l]) model[l] = 0;
      else if (wr_en) model[cur_lvl] = cur_mp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
