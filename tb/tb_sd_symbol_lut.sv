// tb_sd_symbol_lut: checks the reset tables are a Gray mapping per dimension
// (neighbouring points differ in one label bit) with demap the inverse of map,
// then reprograms both tables through the write port and reads them back.
module tb_sd_symbol_lut;
  localparam int Q = 4, QH = 2, NS = 16;
  logic clk = 0, rst_n = 0, lut_we = 0, lut_sel = 0;
  logic [Q-1:0] lut_addr = 0, lut_data = 0;
  logic [Q-1:0] map_tab [NS], demap_tab [NS];
  int checks = 0, failures = 0;
  sd_symbol_lut #(.Q(Q)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int popc(int v); int c = 0; for (int k = 0; k < 8; k++) c += (v >> k) & 1; return c; endfunction
  int perm [NS];
  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int p = 0; p < NS; p++) begin
      checks++;
      if (map_tab[demap_tab[p]] != Q'(p)) begin failures++; $display("inverse %0d", p); end
      // horizontal and vertical neighbours differ in exactly one bit
      if ((p & 3) != 3) begin checks++; if (popc(int'(demap_tab[p] ^ demap_tab[p+1])) != 1) begin failures++; $display("gray row %0d", p); end end
      if ((p >> 2) != 3) begin checks++; if (popc(int'(demap_tab[p] ^ demap_tab[p+4])) != 1) begin failures++; $display("gray col %0d", p); end end
    end
    checks++; if (map_tab[0] != 4'h0) failures++;   // label 0000 -> column 0,row 0
    checks++; if (map_tab[4'b0010] != 4'b0011) failures++; // Gray 10 -> index 3
    // reprogram with a random permutation
    for (int a = 0; a < NS; a++) perm[a] = a;
    for (int a = NS - 1; a > 0; a--) begin int k, t; k = $urandom_range(0, a); t = perm[a]; perm[a] = perm[k]; perm[k] = t; end
    for (int a = 0; a < NS; a++) begin
      lut_we = 1; lut_sel = 0; lut_addr = Q'(a); lut_data = Q'(perm[a]); @(negedge clk);
      lut_sel = 1; lut_addr = Q'(perm[a]); lut_data = Q'(a); @(negedge clk);
    end
    lut_we = 0; @(negedge clk);
    for (int a = 0; a < NS; a++) begin
      checks++; if (map_tab[a] != Q'(perm[a]) || demap_tab[perm[a]] != Q'(a)) begin failures++; $display("prog %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
