// adc: behavioural model of the ADC that digitises one class-column current.
//
// The class tile's column current is the weighted vote of that class. On `sample` the
// model converts it to code = floor(i_in / LSB_PA), saturating at 2^BITS - 1, and holds
// the code until the next sample. The published design names ADCs for combining class
// sums of several tiles digitally but gives no resolution; 20 bits with a 2385 pA LSB
// (full scale just above 500 rows x 5 uA) is this design's choice, fine enough that one
// weight step (about 11.9 nA) spans several codes.
//
// Timing: code is registered, valid the clock after `sample`.
module adc
  import impact_pkg::*;
#(
  parameter int unsigned     BITS   = 20,
  parameter longint unsigned LSB_PA = 2385
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample,
  input  current_t        i_in,
  output logic [BITS-1:0] code
);
  localparam longint unsigned CODE_MAX = (64'd1 << BITS) - 1;
  longint unsigned q;

  always_comb begin
    q = 64'(i_in) / LSB_PA;
    if (q > CODE_MAX) q = CODE_MAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      code <= '0;
    else if (sample) code <= BITS'(q);
  end
endmodule
