// sd_col_zigzag: one column-enumeration unit (one per constellation column).
// Instead of keeping zig-zag state, it searches, among the rows of its column not
// yet flagged as enumerated, the one with the smallest linear distance |row - q|
// to the quantised imaginary part q of the level's centre. Distances are
// (Q/2+1)-bit words: the distance in the upper bits and, as the least significant
// bit, a tie-break that prefers the row on the side of q where the centre lies
// ('upper'). This gives exactly the Schnorr-Euchner order inside the column.
// The tie-break bit is this design's choice. Combinational.
module sd_col_zigzag
  import sd_pkg::*;
#(
  parameter int QH = Q_DEF / 2
) (
  input  logic [2**QH-1:0] row_flags,  // 1 = row already enumerated
  input  logic [QH-1:0]    q_row,
  input  logic             upper,
  output logic [QH-1:0]    best_row,
  output logic             valid       // some row of the column is left
);
  localparam int NR = 2 ** QH;
  logic [QH:0] key, best_key;
  always_comb begin
    best_row = '0;
    best_key = '1;
    valid    = 1'b0;
    for (int r = 0; r < NR; r++) begin
      if (r >= int'(q_row)) key = {QH'(r - int'(q_row)), (r != int'(q_row)) && !upper};
      else                  key = {QH'(int'(q_row) - r), upper};
      if (!row_flags[r] && (!valid || key < best_key)) begin
        best_key = key;
        best_row = QH'(r);
        valid    = 1'b1;
      end
    end
  end
endmodule
