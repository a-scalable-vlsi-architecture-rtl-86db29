// tb_sd_pref_siblings: random writes and pops against a model of M_T-1 entries;
// checks the nearest valid entry above the current level is offered, that a pop
// consumes it and that a write invalidates the entry one level below.
module tb_sd_pref_siblings;
  import sd_pkg::*;
  localparam int MT = 4, Q = 4;
  logic clk = 0, rst_n = 0, clr_all = 0, wr_en = 0, wr_valid = 0, pop_en = 0;
  logic [1:0] wr_lvl = 0, cur_lvl = 0, pop_lvl;
  logic [Q-1:0] wr_pos = 0, wr_label = 0, pop_pos, pop_label;
  logic [WM-1:0] wr_mp = 0, wr_msib = 0, pop_mp, pop_msib;
  logic pop_ok;
  bit mv [MT]; int mpos [MT], mmp [MT], mms [MT], mlab [MT];
  int checks = 0, failures = 0, pops = 0;
  sd_pref_siblings #(.MT(MT), .Q(Q)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    foreach (mv[l]) mv[l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int el;
      clr_all = ($urandom_range(0, 60) == 0);
      cur_lvl = 2'($urandom);
      wr_en = ($urandom_range(0, 2) == 0); pop_en = !wr_en && 1'($urandom);
      wr_lvl = 2'($urandom_range(1, 3)); wr_valid = 1'($urandom);
      wr_pos = Q'($urandom); wr_label = Q'($urandom); wr_mp = WM'($urandom); wr_msib = WM'($urandom);
      #1;
      el = -1;
      for (int l = MT - 1; l > 0; l--) if (l > cur_lvl && mv[l]) el = l;
      checks++;
      if (pop_ok != (el >= 0)) begin failures++; $display("t %0d pop_ok", t); end
      else if (el >= 0) begin
        checks++;
        if (int'(pop_lvl) != el || int'(pop_pos) != mpos[el] || int'(pop_label) != mlab[el] || int'(pop_mp) != mmp[el] || int'(pop_msib) != mms[el]) begin
          failures++; $display("t %0d entry", t);
        end
      end
      @(negedge clk);
      if (clr_all) foreach (mv[l]) mv[l] = 0;
      else begin
        if (pop_en && el >= 0) begin mv[el] = 0; pops++; end
        if (wr_en) begin
          mv[wr_lvl] = wr_valid; mpos[wr_lvl] = wr_pos; mlab[wr_lvl] = wr_label; mmp[wr_lvl] = wr_mp; mms[wr_lvl] = wr_msib;
          mv[wr_lvl - 1] = 0;
        end
      end
    end
    checks++; if (pops == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
