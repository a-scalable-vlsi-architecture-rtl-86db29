// tb_sd_horizontal_enum: random centres, flags and L^A. Brute force over the
// unflagged points gives min M_C (channel candidate) and min M_A (a priori
// candidate); the unit must return the smaller M_P of the two, the bound
// min M_C + min M_A, an unflagged sibling whose own M_P equals the increment,
// and valid = some point unflagged.
module tb_sd_horizontal_enum;
  import sd_pkg::*;
  localparam int Q = 4, NS = 16;
  logic signed [WB-1:0] c_re, c_im; logic signed [WR-1:0] rii; logic [NS-1:0] flags;
  logic [WM-1:0] ma_lvl [NS]; logic [Q-1:0] la_sgn; logic [Q-1:0] map_tab [NS], demap_tab [NS];
  logic [Q-1:0] sib_pos, sib_label; logic [WM-1:0] sib_inc, bound_inc; logic valid, chose_apriori;
  int checks = 0, failures = 0, n_apri = 0;
  sd_horizontal_enum #(.Q(Q)) dut (.*);
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
    for (int a = 0; a < NS; a++) begin map_tab[a] = Q'(a ^ 9); demap_tab[a ^ 9] = Q'(a); end
    for (int t = 0; t < 4000; t++) begin
      int la [Q]; longint mc_min, ma_min, mpc, mpa, exp_inc, m; int pc, pa; bit any;
      c_re = WB'(int'($urandom_range(0, 1600)) - 800); c_im = WB'(int'($urandom_range(0, 1600)) - 800);
      rii = WR'($urandom_range(30, 200));
      flags = NS'($urandom) & NS'($urandom);
      if (t % 50 == 0) flags = '1;
      for (int b = 0; b < Q; b++) begin la[b] = int'($urandom_range(0, 600)) - 300; la_sgn[b] = la[b] < 0; end
      for (int d = 0; d < NS; d++) begin
        int s; s = 0;
        for (int b = 0; b < Q; b++) if ((d >> b) & 1) s += 2 * ((la[b] < 0) ? -la[b] : la[b]);
        ma_lvl[d] = WM'(s);
      end
      any = 0; mc_min = 1 << 30; ma_min = 1 << 30; pc = 0; pa = 0;
      for (int p = 0; p < NS; p++) if (!flags[p]) begin
        any = 1;
        m = mcf(c_re, c_im, rii, p);
        if (m < mc_min) begin mc_min = m; pc = p; end
        m = ma_lvl[demap_tab[p] ^ la_sgn];
        if (m < ma_min) begin ma_min = m; pa = p; end
      end
      #1;
      checks++; if (valid != any) begin failures++; $display("valid"); end
      if (any) begin
        longint own;
        // candidates: any point with the minimum metric of its side
        // equal metrics on one side may be resolved either way: accept any result
        // between the best and the worst tie resolution
        longint xpc, xpa, hi_inc;
        mpc = 1 << 30; mpa = 1 << 30; xpc = 0; xpa = 0;
        for (int p = 0; p < NS; p++) if (!flags[p]) begin
          longint a, c;
          c = mcf(c_re, c_im, rii, p); a = ma_lvl[demap_tab[p] ^ la_sgn];
          if (c == mc_min && c + a < mpc) mpc = c + a;
          if (a == ma_min && c + a < mpa) mpa = c + a;
          if (c == mc_min && c + a > xpc) xpc = c + a;
          if (a == ma_min && c + a > xpa) xpa = c + a;
        end
        exp_inc = (mpc < mpa) ? mpc : mpa;
        hi_inc  = (xpc < xpa) ? xpc : xpa;
        own = mcf(c_re, c_im, rii, sib_pos) + ma_lvl[sib_label ^ la_sgn];
        checks++; if (longint'(bound_inc) != mc_min + ma_min) begin failures++; $display("bound %0d exp %0d", bound_inc, mc_min + ma_min); end
        checks++; if (longint'(sib_inc) < exp_inc || longint'(sib_inc) > hi_inc || longint'(sib_inc) != own) begin failures++; $display("inc %0d exp %0d own %0d mpc %0d mpa %0d dut mc_c %0d ma_c %0d mc_a %0d ma_a %0d apri %0d mcmin %0d mamin %0d", sib_inc, exp_inc, own, mpc, mpa, dut.mc_c, dut.ma_c, dut.mc_a, dut.ma_a, chose_apriori, mc_min, ma_min); end
        checks++; if (flags[sib_pos] || demap_tab[sib_pos] != sib_label) begin failures++; $display("sibling flagged or label"); end
        if (chose_apriori) n_apri++;
      end
    end
    checks++; if (n_apri == 0) begin failures++; $display("a priori side never chosen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
