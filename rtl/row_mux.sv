// row_mux: the bank of row input multiplexers at the left edge of a crossbar tile.
//
// Each row has a two-way MUX whose select is a Boolean input and whose two data inputs
// are a floating node ('Z') and the reading pulse (V_R). The result is a per-row drive:
// row_vr[i] = 1 means V_R is on row i, 0 means the row floats and draws no current.
//
// The clause tile drives a row when its literal is 0 (VR_WHEN_ONE = 0): a literal 1
// floats, so the crosspoint current acts as "NOT TA OR literal". The class tile drives a
// row when its clause is 1 (VR_WHEN_ONE = 1), so only voting clauses add their weight.
// These two polarities follow the published description of the two tiles; the figure
// labels of the class-tile MUX are the same as the clause tile's, and the description
// was followed where the two differ.
//
// Timing: purely combinational; rows are only driven while read_pulse is high.
module row_mux #(
  parameter int unsigned ROWS        = 2048,
  parameter bit          VR_WHEN_ONE = 1'b0
) (
  input  logic [ROWS-1:0] sel,
  input  logic            read_pulse,
  output logic [ROWS-1:0] row_vr
);
  always_comb begin
    if (VR_WHEN_ONE) row_vr = read_pulse ? sel  : '0;
    else             row_vr = read_pulse ? ~sel : '0;
  end
endmodule
