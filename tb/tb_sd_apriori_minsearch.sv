// tb_sd_apriori_minsearch: metric tables built from random |L^A| (the structure
// the unit relies on), random masks; result must be the unmasked minimum with
// the lowest index on ties, found by a linear scan. Metrics stay far below
// saturation, so the exact index is checked.
module tb_sd_apriori_minsearch;
  import sd_pkg::*;
  localparam int Q = 4, NS = 16;
  logic [WM-1:0] ma [NS]; logic [NS-1:0] mask; logic [Q-1:0] d_min; logic [WM-1:0] ma_min; logic valid;
  int checks = 0, failures = 0;
  sd_apriori_minsearch #(.Q(Q)) dut (.*);
  // watchdog: the vectors take one time unit each; give up well after the last
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int a [Q]; int bd, bm;
      for (int b = 0; b < Q; b++) a[b] = (t % 7 == 0) ? 2 * ($urandom_range(0, 3)) : $urandom_range(0, 500);
      for (int d = 0; d < NS; d++) begin int s; s = 0; for (int b = 0; b < Q; b++) if ((d >> b) & 1) s += a[b]; ma[d] = WM'(s); end
      mask = NS'($urandom) | ((t % 5 == 0) ? NS'($urandom) : '0);
      if (t % 97 == 0) mask = '1;
      bd = -1; bm = 0;
      for (int d = 0; d < NS; d++) if (!mask[d] && (bd < 0 || int'(ma[d]) < bm)) begin bd = d; bm = ma[d]; end
      #1;
      checks++;
      if (valid != (bd >= 0) || (bd >= 0 && (int'(ma_min) != bm || int'(d_min) != bd || mask[d_min]))) begin
        failures++; $display("mask %b got d %0d m %0d exp d %0d m %0d", mask, d_min, ma_min, bd, bm);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
