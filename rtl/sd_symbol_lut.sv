// sd_symbol_lut: run-time programmable mapper M and demapper D. The decoder makes
// no assumption on the bit-to-symbol mapping; these two tables convert between a
// Q-bit label (bit value 1 means x = -1) and a constellation point, given as the
// position {column, row} of the square QAM grid (column = real PAM index, row =
// imaginary PAM index, index p meaning amplitude 2p-(2^(Q/2)-1)).
// Write port: lut_we with lut_sel = 0 writes map[lut_addr] = lut_data (position
// of label lut_addr), lut_sel = 1 writes demap[lut_addr] = lut_data (label of
// position lut_addr); takes effect on the next cycle. Both whole tables are
// outputs, read combinationally by the enumeration units. Reset loads a Gray
// mapping per dimension (this design's choice; the design itself only says the
// tables are programmable).
module sd_symbol_lut
  import sd_pkg::*;
#(
  parameter int Q = Q_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         lut_we,
  input  logic         lut_sel,
  input  logic [Q-1:0] lut_addr,
  input  logic [Q-1:0] lut_data,
  output logic [Q-1:0] map_tab   [2**Q],
  output logic [Q-1:0] demap_tab [2**Q]
);
  localparam int QH = Q / 2;
  function automatic logic [QH-1:0] gray2bin(input logic [QH-1:0] g);
    logic [QH-1:0] r;
    r[QH-1] = g[QH-1];
    for (int k = QH - 2; k >= 0; k--) r[k] = r[k+1] ^ g[k];
    return r;
  endfunction
  function automatic logic [QH-1:0] bin2gray(input logic [QH-1:0] v);
    return v ^ (v >> 1);
  endfunction
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < 2**Q; a++) begin
        map_tab[a]   <= {gray2bin(a[Q-1:QH]), gray2bin(a[QH-1:0])};
        demap_tab[a] <= {bin2gray(a[Q-1:QH]), bin2gray(a[QH-1:0])};
      end
    end else if (lut_we) begin
      if (lut_sel) demap_tab[lut_addr] <= lut_data;
      else         map_tab[lut_addr]   <= lut_data;
    end
  end
endmodule
