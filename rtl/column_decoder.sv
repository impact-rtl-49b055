// column_decoder: the clause / class decoder that steers the column DeMUXes.
//
// Every column of a tile ends in a DeMUX that either connects the column to its sense
// circuit (CSA in the clause tile, ADC in the class tile) or leaves it floating. The
// decoder turns a group index into the connect mask: group g connects columns
// g*GROUP .. g*GROUP+GROUP-1. With GROUP = COLS (the default) every column is read in the
// same reading cycle, one sense circuit per column. The grouping scheme is this design's
// choice; only the decoder's existence and its DeMUX fan-out are published.
//
// Timing: combinational.
module column_decoder #(
  parameter int unsigned COLS   = 500,
  parameter int unsigned GROUP  = COLS,
  parameter int unsigned GROUPS = (COLS + GROUP - 1) / GROUP,
  parameter int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic          en,
  input  logic [GW-1:0] grp,
  output logic [COLS-1:0] col_en
);
  always_comb begin
    for (int unsigned c = 0; c < COLS; c++)
      col_en[c] = en && ((c / GROUP) == int'(grp));
  end
endmodule
