// tb_sd_col_zigzag: for every quantised row, side and random flag pattern, the
// chosen row must be the unflagged row nearest to a centre placed just above or
// below the quantised point (true Euclidean order), computed by brute force.
module tb_sd_col_zigzag;
  localparam int QH = 2, NR = 4;
  logic [NR-1:0] row_flags; logic [QH-1:0] q_row, best_row; logic upper, valid;
  int checks = 0, failures = 0;
  sd_col_zigzag #(.QH(QH)) dut (.*);
  // watchdog: the vectors take one time unit each; give up well after the last
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      real c, bd; int br;
      row_flags = NR'($urandom); q_row = QH'($urandom); upper = 1'($urandom);
      // centre: inside the decision cell of q_row, on the 'upper' side
      c = (2.0 * q_row - 3.0) + (upper ? 0.25 + 0.7 * ($urandom_range(0, 100) / 100.0) : -0.25 - 0.7 * ($urandom_range(0, 100) / 100.0));
      if (q_row == 0 && !upper) c = -3.5; if (q_row == 3 && upper) c = 3.5;
      br = -1; bd = 1e9;
      for (int r = 0; r < NR; r++)
        if (!row_flags[r] && ((c - (2.0 * r - 3.0)) ** 2) < bd) begin bd = (c - (2.0 * r - 3.0)) ** 2; br = r; end
      #1;
      checks++;
      if (valid != (br >= 0) || (br >= 0 && int'(best_row) != br)) begin
        failures++; $display("flags %b q %0d up %0d: got %0d exp %0d", row_flags, q_row, upper, best_row, br);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
