// tb_sd_apriori_metrics: random L^A; every table entry M_A(d) must equal
// sum over set bits of d of 2|L^A| (metric format), saturated, one cycle after load.
module tb_sd_apriori_metrics;
  import sd_pkg::*;
  localparam int MT = 4, Q = 4;
  logic clk = 0, rst_n = 0, load = 0;
  logic signed [WLA-1:0] la [MT][Q];
  logic [WM-1:0] ma_tab [MT][2**Q];
  int checks = 0, failures = 0;
  sd_apriori_metrics #(.MT(MT), .Q(Q)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++) la[i][b] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      int mag;
      mag = (t % 5 == 4) ? 8191 : 600;
      for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++) la[i][b] = WLA'(int'($urandom_range(0, 2 * mag)) - mag);
      load = 1; @(negedge clk); load = 0;
      for (int i = 0; i < MT; i++) for (int d = 0; d < 2**Q; d++) begin
        longint s;
        s = 0;
        for (int b = 0; b < Q; b++) if ((d >> b) & 1) s += 2 * ((la[i][b] < 0) ? -la[i][b] : la[i][b]);
        if (s > 32766) s = 32766;
        checks++;
        if (longint'(ma_tab[i][d]) != s) begin failures++; $display("i %0d d %0d got %0d exp %0d", i, d, ma_tab[i][d], s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
