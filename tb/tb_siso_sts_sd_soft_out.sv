// tb_siso_sts_sd_soft_out: the decoder built without soft-input support
// (SOFT_IN = 0), as used for the first detection pass of an iterative receiver.
// Same stimulus as the soft-input end-to-end test, including random a priori
// LLRs on the la inputs, which this build must ignore: the brute-force reference
// uses L^A = 0. Checks lambda^MAP, the MAP labels, the extrinsic LLRs (exact
// without effective clipping, one-sided with tight clipping), the n_en + 3
// latency, and that steps down, sideways and up, leaf updates, MAP changes and
// clipping all occurred; a priori-chosen nodes must never occur.
module tb_siso_sts_sd_soft_out;
  import sd_pkg::*;
  localparam int MT = MT_DEF, Q = Q_DEF, QH = Q / 2, NS = 2 ** Q;
  localparam int NV = 24;
  parameter int LMAX_A = 256;

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [WY-1:0]  y_re [MT], y_im [MT];
  logic signed [WR-1:0]  r_re [MT][MT], r_im [MT][MT];
  logic signed [WLA-1:0] la [MT][Q];
  logic [WM-1:0] lmax;
  logic lut_we = 0, lut_sel = 0;
  logic [Q-1:0] lut_addr = 0, lut_data = 0;
  logic busy, done;
  logic signed [WLE-1:0] le [MT][Q];
  logic [Q-1:0] map_label [MT];
  logic [WM-1:0] lam_map;
  logic [31:0] n_en;

  siso_sts_sd #(.SOFT_IN(1'b0)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event counters
  int n_inexact = 0;
  int n_down = 0, n_sib = 0, n_up = 0, n_vapri = 0, n_hapri = 0, n_leaf = 0, n_newmap = 0, n_clip = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.step_down) n_down++;
    if (dut.step_sib) n_sib++;
    if (dut.step_up && dut.pop_ok) n_up++;
    if ((dut.step_down || dut.root) && dut.v_apri) n_vapri++;
    if (dut.step_sib && dut.h_apri) n_hapri++;
    if (dut.leaf_upd && !dut.new_map) n_leaf++;
    if (dut.new_map) n_newmap++;
  end

  // reference mapping tables (label -> {col,row}) kept by the testbench
  int tmap [NS];
  function automatic int g2b(int g);
    int r = 0;
    for (int k = QH - 1; k >= 0; k--) r |= ((((r >> (k + 1)) & 1) ^ ((g >> k) & 1)) << k);
    return r;
  endfunction
  function automatic int amp(int p); return 2 * p - ((1 << QH) - 1); endfunction
  function automatic longint sat(longint v); return (v > 32766) ? 32766 : v; endfunction

  int ref_le [MT][Q];
  longint ref_lbar [MT][Q];
  int ref_bl [MT];
  longint ref_lam;

  task automatic reference();
    longint best = 64'h7fffffffffffffff;
    longint lbar [MT][Q];
    int     bl [MT];
    int     lab [MT];
    int     la0 = 0;   // L^A seen by this build
    for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++) lbar[i][b] = 64'h7fffffffffffffff;
    // enumerate all label vectors; first pass finds MAP
    for (int pass = 0; pass < 2; pass++)
      for (int v = 0; v < (1 << (Q * MT)); v++) begin
        longint P = 0;
        for (int i = MT - 1; i >= 0; i--) begin
          longint bre, bim, er, ei, mc, ma;
          int pos;
          lab[i] = (v >> (Q * i)) & (NS - 1);
          bre = y_re[i]; bim = y_im[i];
          for (int j = i + 1; j < MT; j++) begin
            int ar, ai, pj;
            pj = tmap[lab[j]];
            ar = amp(pj >> QH); ai = amp(pj & ((1 << QH) - 1));
            bre -= r_re[i][j] * ar - r_im[i][j] * ai;
            bim -= r_re[i][j] * ai + r_im[i][j] * ar;
          end
          pos = tmap[lab[i]];
          er = bre - r_re[i][i] * amp(pos >> QH);
          ei = bim - r_re[i][i] * amp(pos & ((1 << QH) - 1));
          mc = sat((er * er + ei * ei) >> 8);
          ma = 0;
          for (int b = 0; b < Q; b++) begin
            int xb = (lab[i] >> b) & 1;
            int sb = (la0 < 0) ? 1 : 0;
            if (xb != sb) ma = sat(ma + 2 * ((la0 < 0) ? -la0 : la0));
          end
          P = sat(P + sat(mc + ma));
        end
        if (pass == 0) begin
          if (P < best) begin best = P; for (int i = 0; i < MT; i++) bl[i] = lab[i]; end
        end else begin
          for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++)
            if (((lab[i] >> b) & 1) != ((bl[i] >> b) & 1) && P < lbar[i][b]) lbar[i][b] = P;
        end
      end
    ref_lam = best;
    ref_lbar = lbar; ref_bl = bl;
    for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++) begin
      longint lax, e;
      int x1 = (bl[i] >> b) & 1;
      lax = 2 * la0;
      if (x1) lax = -lax;
      e = lbar[i][b] - lax - best;
      if (e > longint'(lmax)) e = longint'(lmax);
      if (e < -longint'(lmax)) e = -longint'(lmax);
      if (x1) e = -e;
      ref_le[i][b] = int'(e >>> 1);
    end
  endtask

  task automatic program_lut(bit natural);
    // natural binary per dimension instead of Gray
    for (int a = 0; a < NS; a++) begin
      int p = natural ? a : ((g2b(a >> QH) << QH) | g2b(a & ((1 << QH) - 1)));
      tmap[a] = p;
      @(negedge clk); lut_we = 1; lut_sel = 0; lut_addr = Q'(a); lut_data = Q'(p);
      @(negedge clk); lut_sel = 1; lut_addr = Q'(p); lut_data = Q'(a);
    end
    @(negedge clk); lut_we = 0;
  endtask

  longint tot_nodes = 0;
  initial begin
    for (int a = 0; a < NS; a++) tmap[a] = (g2b(a >> QH) << QH) | g2b(a & ((1 << QH) - 1));
    for (int i = 0; i < MT; i++) begin
      y_re[i] = 0; y_im[i] = 0;
      for (int j = 0; j < MT; j++) begin r_re[i][j] = 0; r_im[i][j] = 0; end
      for (int b = 0; b < Q; b++) la[i][b] = 0;
    end
    lmax = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      int noise, lamag;
      longint t0, t1;
      bit mism;
      if (v == NV / 2) program_lut(1);
      noise = (v % 4 == 0) ? 10 : ((v % 4 == 1) ? 30 : 60);
      lamag = (v % 3 == 0) ? 0 : ((v % 3 == 1) ? 100 : 400);
      for (int i = 0; i < MT; i++)
        for (int j = 0; j < MT; j++) begin
          if (j < i) begin r_re[i][j] = 0; r_im[i][j] = 0; end
          else if (j == i) begin r_re[i][j] = WR'(40 + $urandom_range(0, 100)); r_im[i][j] = 0; end
          else begin r_re[i][j] = WR'(int'($urandom_range(0, 128)) - 64); r_im[i][j] = WR'(int'($urandom_range(0, 128)) - 64); end
        end
      begin
        int lab [MT];
        for (int i = 0; i < MT; i++) lab[i] = $urandom_range(0, NS - 1);
        for (int i = 0; i < MT; i++) begin
          int yr, yi, p, ar, ai;
          yr = 0; yi = 0;
          for (int j = i; j < MT; j++) begin
            p = tmap[lab[j]];
            ar = amp(p >> QH); ai = amp(p & ((1 << QH) - 1));
            yr += r_re[i][j] * ar - r_im[i][j] * ai;
            yi += r_re[i][j] * ai + r_im[i][j] * ar;
          end
          yr += int'($urandom_range(0, 2 * noise)) - noise;
          yi += int'($urandom_range(0, 2 * noise)) - noise;
          y_re[i] = WY'(yr); y_im[i] = WY'(yi);
          for (int b = 0; b < Q; b++) la[i][b] = (lamag == 0) ? '0 : WLA'(int'($urandom_range(0, 2 * lamag)) - lamag);
        end
      end
      lmax = (v % 2 == 0) ? WM'(LMAX_A) : WM'(2000);
      reference();
      @(negedge clk); start = 1;
      t0 = cyc;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      t1 = cyc;
      tot_nodes += n_en;
      checks++;
      if (lam_map != WM'(ref_lam)) begin
        failures++; $display("vec %0d: lambda_MAP %0d expected %0d", v, lam_map, ref_lam);
      end
      mism = 0;
      for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++) begin
        checks++;
        if (le[i][b] == lmax / 2 || le[i][b] == -lmax / 2) n_clip++;
        // Without effective clipping the search is exact. With a tight clipping
        // level the clipped radius of a bit whose MAP value flips later can prune
        // its final counter-hypothesis; the result may then only be further from
        // zero (in the MAP direction), never closer, and stays within +-Lmax.
        if (lmax >= 2000) begin
          if (int'(le[i][b]) != ref_le[i][b]) begin
            failures++; mism = 1;
            $display("vec %0d: LE[%0d][%0d] = %0d expected %0d", v, i, b, le[i][b], ref_le[i][b]);
          end
        end else begin
          int dir;
          dir = map_label[i][b] ? -1 : 1;
          if (dir * int'(le[i][b]) < dir * ref_le[i][b] || int'(le[i][b]) > int'(lmax / 2) || int'(le[i][b]) < -int'(lmax / 2)) begin
            failures++; mism = 1;
            $display("vec %0d: clipped LE[%0d][%0d] = %0d reference %0d", v, i, b, le[i][b], ref_le[i][b]);
          end
          if (int'(le[i][b]) != ref_le[i][b]) n_inexact++;
        end
      end
      for (int i = 0; i < MT; i++) begin
        checks++;
        if (int'(map_label[i]) != ref_bl[i]) begin
          failures++; $display("vec %0d: MAP label %0d = %0h expected %0h", v, i, map_label[i], ref_bl[i]);
        end
      end
      checks++;
      if (t1 - t0 != longint'(n_en) + 3) begin
        failures++; $display("vec %0d: latency %0d for %0d nodes", v, t1 - t0, n_en);
      end
    end
    $display("avg examined nodes %0d.%0d (of %0d leaves)", tot_nodes / NV, (tot_nodes * 10 / NV) % 10, 1 << (Q * MT));
    $display("clipped LLRs differing from the exact clipped max-log value: %0d", n_inexact);
    $display("events: down=%0d sib=%0d up=%0d v_apri=%0d h_apri=%0d leafupd=%0d newmap=%0d clip=%0d",
             n_down, n_sib, n_up, n_vapri, n_hapri, n_leaf, n_newmap, n_clip);
    checks++; if (tot_nodes / NV >= (1 << (Q * MT))) failures++;
    checks++; if (n_down == 0) begin failures++; $display("no step down"); end
    checks++; if (n_sib == 0) begin failures++; $display("no sibling step"); end
    checks++; if (n_up == 0) begin failures++; $display("no step up"); end
    checks++; if (n_vapri != 0 || n_hapri != 0) begin failures++; $display("a priori candidate chosen without soft input"); end
    checks++; if (n_leaf == 0) begin failures++; $display("no leaf update"); end
    checks++; if (n_newmap == 0) begin failures++; $display("no new MAP"); end
    checks++; if (n_clip == 0) begin failures++; $display("no clipping"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
