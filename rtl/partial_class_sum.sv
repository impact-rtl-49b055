// partial_class_sum: adds the digitised partial class sums of J class tiles.
//
// When a model has more clauses than one class tile has rows, the clauses are split over
// J tiles. Each tile's ADCs give a partial weighted sum per class and the full class sum
// is their total, formed in the digital domain. The published figure prints an AND
// symbol for this combination, while the text says the digitised outputs are combined
// into the class weight; a sum is what the weighted vote needs, so a sum is used.
//
// Interface: partial[j][m] is tile j's code for class m; sums[m] is combinational and
// BITS + clog2(J) bits wide, so it cannot overflow. The default J = 2 is the smallest split
// (the top sets J; with J = 1 the sum reduces to a wire).
module partial_class_sum #(
  parameter int unsigned J    = 2,
  parameter int unsigned M    = 10,
  parameter int unsigned BITS = 20,
  parameter int unsigned SW   = BITS + ((J > 1) ? $clog2(J) : 0)
) (
  input  logic [BITS-1:0] partial [J][M],
  output logic [SW-1:0]   sums [M]
);
  always_comb begin
    for (int m = 0; m < M; m++) begin
      sums[m] = '0;
      for (int j = 0; j < J; j++) sums[m] += SW'(partial[j][m]);
    end
  end
endmodule
