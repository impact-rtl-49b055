// csa: behavioural model of the current sense amplifier at the foot of a clause column.
//
// The real part is an analog latch (two cross-coupled inverter pairs with SE-gated
// supply and Dis-gated discharge transistors). The column current flows through a
// resistor to ground; the CSA compares that voltage with Vref and resolves to the
// Boolean clause C and its inverse. Here resistor and Vref are folded into one current
// threshold: a clause current of TRIP_PA (4.1 uA) or more means some literal 0 met an
// include action, so C = 0; below it C = 1.
//
// Behaviour per clock: on the first clock of SE the latch takes its decision from `ic`;
// while SE stays high the outputs show {C, ~C}; when SE is low or Dis is high both
// outputs sit at the common (low) level. Outputs are therefore valid from the second SE
// clock. The threshold follows the published CSA characterisation; the one-clock
// regeneration time is this model's choice.
module csa
  import impact_pkg::*;
#(
  parameter longint unsigned TRIP_PA = CSA_TRIP_PA
) (
  input  logic     clk,
  input  logic     rst_n,
  input  current_t ic,
  input  logic     se,
  input  logic     dis,
  output logic     c,
  output logic     c_n
);
  logic se_q;      // SE of the previous clock, to find its rising edge
  logic decision;  // latched Boolean clause

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      se_q     <= 1'b0;
      decision <= 1'b0;
    end else begin
      se_q <= se;
      if (se && !se_q) decision <= (64'(ic) < TRIP_PA);
    end
  end

  always_comb begin
    c   = se && se_q && !dis &&  decision;
    c_n = se && se_q && !dis && !decision;
  end
endmodule
