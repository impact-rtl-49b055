// argmax: picks the classified class, the one with the largest weighted class sum.
//
// A linear compare chain over the M sums; a later class wins only when its sum is
// strictly larger, so ties go to the lowest class index (tie handling is not published
// and is this design's choice).
//
// Timing: cls and max_sum are registered; out_valid follows `valid` by one clock.
module argmax #(
  parameter int unsigned M  = 10,
  parameter int unsigned W  = 20,
  parameter int unsigned CW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid,
  input  logic [W-1:0]  sums [M],
  output logic          out_valid,
  output logic [CW-1:0] cls,
  output logic [W-1:0]  max_sum
);
  logic [CW-1:0] best_i;
  logic [W-1:0]  best_v;

  always_comb begin
    best_i = '0;
    best_v = sums[0];
    for (int m = 1; m < M; m++)
      if (sums[m] > best_v) begin
        best_i = CW'(m);
        best_v = sums[m];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      cls       <= '0;
      max_sum   <= '0;
    end else begin
      out_valid <= valid;
      if (valid) begin
        cls     <= best_i;
        max_sum <= best_v;
      end
    end
  end
endmodule
