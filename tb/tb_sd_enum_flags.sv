// tb_sd_enum_flags: random init/set/clear operations against a bit-array model.
module tb_sd_enum_flags;
  localparam int MT = 4, Q = 4, NS = 16;
  logic clk = 0, rst_n = 0, clr_all = 0, init_en = 0, set_en = 0;
  logic [1:0] init_lvl = 0, set_lvl = 0; logic [Q-1:0] init_pos = 0, set_pos = 0;
  logic [NS-1:0] flags [MT];
  bit model [MT][NS];
  int checks = 0, failures = 0;
  sd_enum_flags #(.MT(MT), .Q(Q)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    foreach (model[i, p]) model[i][p] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      clr_all = ($urandom_range(0, 40) == 0); init_en = 1'($urandom); set_en = 1'($urandom);
      init_lvl = 2'($urandom); set_lvl = 2'($urandom); init_pos = Q'($urandom); set_pos = Q'($urandom);
      if (init_en && set_en && init_lvl == set_lvl) set_lvl = init_lvl + 1'b1;
      @(negedge clk);
      if (clr_all) foreach (model[i, p]) model[i][p] = 0;
      else begin
        if (set_en) model[set_lvl][set_pos] = 1;
        if (init_en) begin for (int p = 0; p < NS; p++) model[init_lvl][p] = 0; model[init_lvl][init_pos] = 1; end
      end
      for (int i = 0; i < MT; i++) for (int p = 0; p < NS; p++) begin
        checks++; if (flags[i][p] != model[i][p]) begin failures++; $display("t %0d lvl %0d pos %0d", t, i, p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
