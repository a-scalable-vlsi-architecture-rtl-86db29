// tb_sd_pruning: drives random examined nodes (levels, labels, metrics, sibling
// bounds) and compares against an integer model of the pruning unit: counter-
// hypothesis radii with extrinsic clipping, step-down set {i<j or bit differs},
// sibling set {i<=j or bit differs}, leaf updates (new MAP / counter-hypothesis)
// and the clipped extrinsic LLR output. Metrics are biased downwards over time,
// as in a real search, so that MAP changes, updates and pruning all occur.
module tb_sd_pruning;
  import sd_pkg::*;
  localparam int MT = 4, Q = 4;
  localparam longint INF = 32767;
  logic clk = 0, rst_n = 0, clr_all = 0, examine = 0;
  logic [1:0] lvl = 0; logic [Q-1:0] label = 0, path_label [MT];
  logic [WM-1:0] mp = 0, msib = 0, lmax = 0;
  logic signed [WLA-1:0] la [MT][Q];
  logic prune_down, stop_sib, leaf_upd, new_map;
  logic signed [WLE-1:0] le [MT][Q];
  logic [Q-1:0] map_label [MT];
  logic [WM-1:0] lam_map;
  longint mlb [MT][Q], mlam; int mlab [MT];
  int checks = 0, failures = 0, n_newmap = 0, n_upd = 0, n_pd = 0, n_ss = 0;
  sd_pruning #(.MT(MT), .Q(Q)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint lax(int i, int b);
    return ((mlab[i] >> b) & 1) ? -2 * longint'(la[i][b]) : 2 * longint'(la[i][b]);
  endfunction
  function automatic longint clmp(longint v, longint lo, longint hi); return v < lo ? lo : (v > hi ? hi : v); endfunction
  function automatic longint radius(int i, int b);
    longint e;
    if (mlam == INF) return INF;
    e = (mlb[i][b] == INF) ? mlam + lmax : mlb[i][b] - lax(i, b);
    e = clmp(e, mlam - lmax, mlam + lmax) + lax(i, b);
    return clmp(e, 0, INF - 1);
  endfunction

  task automatic reset_model();
    mlam = INF; foreach (mlab[i]) mlab[i] = 0; foreach (mlb[i, b]) mlb[i][b] = INF;
  endtask

  initial begin
    reset_model();
    foreach (la[i, b]) la[i][b] = 0;
    foreach (path_label[i]) path_label[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      clr_all = 1; @(negedge clk); clr_all = 0; reset_model();
      foreach (la[i, b]) la[i][b] = WLA'(int'($urandom_range(0, 400)) - 200);
      lmax = (run % 2) ? WM'(3000) : WM'(200);
      for (int t = 0; t < 300; t++) begin
        int plab [MT]; bit epd, ess;
        int top;
        top = 3000 - 9 * t; if (top < 50) top = 50;
        examine = 1;
        lvl = ($urandom_range(0, 1)) ? 2'd0 : 2'($urandom);
        label = Q'($urandom);
        for (int i = 0; i < MT; i++) path_label[i] = (i > lvl) ? (($urandom_range(0, 2) == 0) ? Q'($urandom) : Q'(mlab[i])) : Q'($urandom);
        if ($urandom_range(0, 2) == 0) label = Q'(mlab[lvl]);
        mp = WM'($urandom_range(0, top)); msib = WM'($urandom_range(0, mp));
        for (int i = 0; i < MT; i++) plab[i] = (i == lvl) ? int'(label) : int'(path_label[i]);
        epd = 1; ess = 1;
        for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++) begin
          bit diff;
          diff = ((plab[i] >> b) & 1) != ((mlab[i] >> b) & 1);
          if ((i < lvl || diff) && !(longint'(mp) >= radius(i, b))) epd = 0;
          if ((i <= lvl || diff) && !(longint'(msib) >= radius(i, b))) ess = 0;
        end
        #1;
        checks++;
        if (prune_down != epd || stop_sib != ess) begin failures++; $display("run %0d t %0d: pd %0d/%0d ss %0d/%0d", run, t, prune_down, epd, stop_sib, ess); end
        if (epd) n_pd++; if (ess) n_ss++;
        @(negedge clk);
        if (lvl == 0 && !epd) begin
          n_upd++;
          if (longint'(mp) < mlam) begin
            n_newmap++;
            for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++)
              if (((plab[i] >> b) & 1) != ((mlab[i] >> b) & 1) && mlam < mlb[i][b]) mlb[i][b] = mlam;
            mlam = mp; for (int i = 0; i < MT; i++) mlab[i] = plab[i];
          end else begin
            for (int i = 0; i < MT; i++) for (int b = 0; b < Q; b++)
              if (((plab[i] >> b) & 1) != ((mlab[i] >> b) & 1) && longint'(mp) < mlb[i][b]) mlb[i][b] = mp;
          end
        end
        checks++;
        if (longint'(lam_map) != mlam) begin failures++; $display("lambda"); end
        for (int i = 0; i < MT; i++) begin
          checks++; if (int'(map_label[i]) != mlab[i]) begin failures++; $display("map label"); end
          for (int b = 0; b < Q; b++) begin
            longint e;
            if (mlam == INF) e = 0;
            else begin
              e = ((mlb[i][b] == INF) ? mlam + lmax : mlb[i][b] - lax(i, b));
              e = clmp(e, mlam - lmax, mlam + lmax) - mlam;
              if ((mlab[i] >> b) & 1) e = -e;
              e = e >>> 1;
            end
            checks++; if (longint'(le[i][b]) != e) begin failures++; $display("run %0d LE %0d %0d: %0d exp %0d", run, i, b, le[i][b], e); end
          end
        end
      end
      examine = 0;
    end
    $display("new MAP %0d, updates %0d, step-down prunes %0d, sibling stops %0d", n_newmap, n_upd, n_pd, n_ss);
    checks++; if (n_newmap == 0 || n_upd == n_newmap || n_pd == 0 || n_ss == 0) begin failures++; $display("a mechanism never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
