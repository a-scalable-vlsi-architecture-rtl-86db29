// sd_enum_flags: enumerated-nodes flags (unit 7), 2^Q bits per tree level
// (M_T*2^Q in total), indexed by constellation position {col,row}. Both
// enumeration units mask their searches with them, so every node of a level is
// enumerated once although channel and a priori orders differ.
// Per cycle: 'clr_all' clears everything (new received vector); 'init_en' starts a
// new enumeration on level init_lvl holding only init_pos (vertical step);
// 'set_en' adds set_pos on level set_lvl (horizontal step). init and set may hit
// different levels in the same cycle. Updates are visible the next cycle.
module sd_enum_flags
  import sd_pkg::*;
#(
  parameter int MT = MT_DEF,
  parameter int Q  = Q_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr_all,
  input  logic                  init_en,
  input  logic [$clog2(MT)-1:0] init_lvl,
  input  logic [Q-1:0]          init_pos,
  input  logic                  set_en,
  input  logic [$clog2(MT)-1:0] set_lvl,
  input  logic [Q-1:0]          set_pos,
  output logic [2**Q-1:0]       flags [MT]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MT; i++) flags[i] <= '0;
    end else if (clr_all) begin
      for (int i = 0; i < MT; i++) flags[i] <= '0;
    end else begin
      if (set_en) flags[set_lvl][set_pos] <= 1'b1;
      if (init_en) begin
        flags[init_lvl] <= '0;
        flags[init_lvl][init_pos] <= 1'b1;
      end
    end
  end
endmodule
