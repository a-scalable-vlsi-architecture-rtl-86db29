// tb_sd_vertical_enum: random channels, paths and L^A. Independently computes the
// centre, the M_C/M_A of all 16 points, the nearest point (minimum M_C) and the
// a priori favourite (d = 0); checks centre, first child metric = min of the
// two candidates' M_P, bound increment = minimum M_C, and a consistent label.
module tb_sd_vertical_enum;
  import sd_pkg::*;
  localparam int MT = 4, Q = 4, QH = 2, NS = 16;
  logic [1:0] level; logic [Q-1:0] path_pos [MT];
  logic signed [WY-1:0] y_re [MT], y_im [MT];
  logic signed [WR-1:0] r_re [MT][MT], r_im [MT][MT];
  logic [Q-1:0] la_sgn [MT]; logic [WM-1:0] ma_tab [MT][NS];
  logic [Q-1:0] map_tab [NS], demap_tab [NS];
  logic signed [WB-1:0] c_re, c_im; logic [Q-1:0] child_pos, child_label;
  logic [WM-1:0] child_inc, bound_inc; logic chose_apriori;
  int checks = 0, failures = 0, n_apri = 0;
  sd_vertical_enum #(.MT(MT), .Q(Q)) dut (.*);
  // watchdog: the vectors take one time unit each; give up well after the last
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int amp(int p); return 2 * p - 3; endfunction
  function automatic longint mcf(longint br, longint bi, longint r, int pos);
    longint er, ei, s;
    er = br - r * amp(pos >> 2); ei = bi - r * amp(pos & 3);
    s = (er * er + ei * ei) >> 8;
    return (s > 32766) ? 32766 : s;
  endfunction
  initial begin
    // natural-binary tables for this test
    for (int a = 0; a < NS; a++) begin map_tab[a] = Q'(a ^ 5); demap_tab[a ^ 5] = Q'(a); end
    for (int t = 0; t < 3000; t++) begin
      longint br, bi, best_mc, mca, mpc, ma;
      int bp, la [MT][Q];
      level = 2'($urandom_range(0, 3));
      for (int i = 0; i < MT; i++) begin
        path_pos[i] = Q'($urandom);
        y_re[i] = WY'(int'($urandom_range(0, 2400)) - 1200); y_im[i] = WY'(int'($urandom_range(0, 2400)) - 1200);
        for (int j = 0; j < MT; j++) begin
          r_re[i][j] = (j == i) ? WR'($urandom_range(30, 200)) : WR'(int'($urandom_range(0, 200)) - 100);
          r_im[i][j] = (j == i) ? '0 : WR'(int'($urandom_range(0, 200)) - 100);
        end
        for (int b = 0; b < Q; b++) begin la[i][b] = int'($urandom_range(0, 400)) - 200; la_sgn[i][b] = la[i][b] < 0; end
        for (int d = 0; d < NS; d++) begin
          int s; s = 0;
          for (int b = 0; b < Q; b++) if ((d >> b) & 1) s += 2 * ((la[i][b] < 0) ? -la[i][b] : la[i][b]);
          ma_tab[i][d] = WM'(s);
        end
      end
      br = y_re[level]; bi = y_im[level];
      for (int j = level + 1; j < MT; j++) begin
        br -= r_re[level][j] * amp(path_pos[j] >> 2) - r_im[level][j] * amp(path_pos[j] & 3);
        bi -= r_re[level][j] * amp(path_pos[j] & 3) + r_im[level][j] * amp(path_pos[j] >> 2);
      end
      best_mc = 1 << 30; bp = 0;
      for (int p = 0; p < NS; p++) if (mcf(br, bi, r_re[level][level], p) < best_mc) begin best_mc = mcf(br, bi, r_re[level][level], p); bp = p; end
      // the nearest point may be tied: accept any tied point's M_P
      begin
        longint lo, hi, v;
        lo = 1 << 30; hi = 0;
        for (int p = 0; p < NS; p++) if (mcf(br, bi, r_re[level][level], p) == best_mc) begin
          v = best_mc + ma_tab[level][demap_tab[p] ^ la_sgn[level]]; if (v > 32766) v = 32766;
          if (v < lo) lo = v; if (v > hi) hi = v;
        end
        mpc = lo; ma = hi;
      end
      mca = mcf(br, bi, r_re[level][level], int'(map_tab[la_sgn[level]]));
      #1;
      checks++; if (longint'(c_re) != br || longint'(c_im) != bi) begin failures++; $display("centre"); end
      checks++; if (longint'(bound_inc) != best_mc) begin failures++; $display("bound %0d exp %0d", bound_inc, best_mc); end
      checks++; if (longint'(child_inc) < ((mpc <= mca) ? mpc : mca) || longint'(child_inc) > ((ma <= mca) ? ma : mca)) begin failures++; $display("child inc %0d exp %0d/%0d", child_inc, mpc, mca); end
      checks++; if (demap_tab[child_pos] != child_label) begin failures++; $display("label"); end
      if (chose_apriori) n_apri++;
    end
    checks++; if (n_apri == 0) begin failures++; $display("a priori side never chosen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
