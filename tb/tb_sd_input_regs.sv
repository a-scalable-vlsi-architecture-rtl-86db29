// tb_sd_input_regs: loads random R, y~ and L^A, checks they appear one cycle later,
// are held while 'load' is low, and that la_sgn carries the L^A sign bits.
module tb_sd_input_regs;
  import sd_pkg::*;
  localparam int MT = 4, Q = 4;
  logic clk = 0, rst_n = 0, load = 0;
  logic signed [WY-1:0]  y_re_i [MT], y_im_i [MT], y_re [MT], y_im [MT];
  logic signed [WR-1:0]  r_re_i [MT][MT], r_im_i [MT][MT], r_re [MT][MT], r_im [MT][MT];
  logic signed [WLA-1:0] la_i [MT][Q], la [MT][Q];
  logic [Q-1:0] la_sgn [MT];
  int checks = 0, failures = 0;
  sd_input_regs #(.MT(MT), .Q(Q)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic randomise();
    for (int i = 0; i < MT; i++) begin
      y_re_i[i] = WY'($urandom); y_im_i[i] = WY'($urandom);
      for (int j = 0; j < MT; j++) begin r_re_i[i][j] = WR'($urandom); r_im_i[i][j] = WR'($urandom); end
      for (int b = 0; b < Q; b++) la_i[i][b] = WLA'($urandom);
    end
  endtask
  task automatic compare(string what);
    for (int i = 0; i < MT; i++) begin
      checks++; if (y_re[i] != y_re_i[i] || y_im[i] != y_im_i[i]) begin failures++; $display("%s y %0d", what, i); end
      for (int j = 0; j < MT; j++) begin
        checks++; if (r_re[i][j] != r_re_i[i][j] || r_im[i][j] != r_im_i[i][j]) begin failures++; $display("%s r", what); end
      end
      for (int b = 0; b < Q; b++) begin
        checks++; if (la[i][b] != la_i[i][b] || la_sgn[i][b] != (la_i[i][b] < 0)) begin failures++; $display("%s la", what); end
      end
    end
  endtask
  initial begin
    randomise();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      randomise(); load = 1; @(negedge clk); load = 0;
      compare("load");
      begin
        // new inputs without load must not change the registers
        logic signed [WY-1:0] keep;
        keep = y_re[0];
        randomise(); @(negedge clk);
        checks++; if (y_re[0] != keep) begin failures++; $display("hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
