// weight_offset: turns the signed (bipolar) CoTM clause weights into unipolar ones.
//
// A crossbar can only hold non-negative conductances, so every weight is shifted by the
// magnitude of the most negative weight of the model: W' = W + |W_min|. The same shift
// on every weight leaves the arg-max over classes unchanged. A scan pass over all
// weights (scan_valid) finds W_min; afterwards w_out = w_in + |W_min| for the write
// pass. If no weight is negative W_min stays 0 and nothing is shifted (this case is
// not published). `clear` restarts the scan for a new model.
//
// Timing: wmin is registered; w_out is combinational from w_in and wmin.
module weight_offset #(
  parameter int unsigned WB = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 scan_valid,
  input  logic signed [WB-1:0] scan_w,
  input  logic signed [WB-1:0] w_in,
  output logic        [WB-1:0] w_out,
  output logic signed [WB-1:0] wmin
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           wmin <= '0;
    else if (clear)                       wmin <= '0;
    else if (scan_valid && scan_w < wmin) wmin <= scan_w;
  end

  assign w_out = WB'(w_in - wmin);
endmodule
