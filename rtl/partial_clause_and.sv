// partial_clause_and: joins partial clauses from X clause tiles into full clauses.
//
// When a model has more literals than one clause tile has rows, the literals are split
// over X tiles that hold the same clause columns. Each tile then yields a partial clause
// (the AND over its own literal subset), and the full clause is the AND of the X
// partials, done with digital AND gates outside the arrays, as published.
//
// Interface: partial[x] is tile x's clause vector; combinational. The default X = 2 is the
// smallest split (the top sets X; with X = 1 the AND reduces to a wire).
module partial_clause_and #(
  parameter int unsigned X = 2,
  parameter int unsigned N = 500
) (
  input  logic [N-1:0] partial [X],
  output logic [N-1:0] clauses
);
  always_comb begin
    clauses = '1;
    for (int x = 0; x < X; x++) clauses &= partial[x];
  end
endmodule
