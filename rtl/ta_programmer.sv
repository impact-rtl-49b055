// ta_programmer: writes trained Tsetlin-automaton actions into a clause tile.
//
// A trained TA ends in one of 256 states (1..256). States above 128 lie in the include
// half and become an include action, the others an exclude action. Include is stored as
// a high-conductance cell (HCS, above 2.4 uS), exclude as a low-conductance cell (LCS,
// below 1 nS). The cells start erased at about 2.5 uS, so include cells normally need no
// pulse and exclude cells are programmed down with 1 ms program pulses. Each pulse is
// preceded by a verify read of the cell (write-verify), and programming of a cell stops
// as soon as its current crosses the target level, or after MAX_PULSES pulses, when it
// is reported as failed. The mapping and the 1 ms pulse follow the published flow; the
// verify loop and the pulse budget are this design's choices.
//
// Interface: valid/ready stream of (row, col, state). While busy the block drives
// `pulse` and the verify address; vfy_current must return that cell's current in the
// same clock. `done` pulses for one clock with the number of pulses used, the chosen
// action and `fail`. Timing: 1 clock to accept, then 2 clocks per pulse (verify, pulse)
// and 1 clock for the final verify.
module ta_programmer
  import impact_pkg::*;
#(
  parameter int unsigned MAX_PULSES = 31,
  parameter int unsigned HALF       = 128
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [AW-1:0] in_row,
  input  logic [AW-1:0] in_col,
  input  logic [8:0]    in_state,
  output pulse_cmd_t    pulse,
  output logic [AW-1:0] vfy_row,
  output logic [AW-1:0] vfy_col,
  input  current_t      vfy_current,
  output logic          busy,
  output logic          done,
  output logic          done_include,
  output logic [7:0]    done_pulses,
  output logic          done_fail
);
  typedef enum logic [1:0] { S_IDLE, S_VERIFY, S_PULSE } state_t;
  state_t        st;
  logic [AW-1:0] row, col;
  logic          incl;
  logic [7:0]    npulses;
  logic          reached;

  localparam current_t I_HCS = current_t'(G_HCS_MIN_PS) * current_t'(VR_VOLTS);
  localparam current_t I_LCS = current_t'(G_LCS_MAX_PS) * current_t'(VR_VOLTS);

  assign reached  = incl ? (vfy_current > I_HCS) : (vfy_current < I_LCS);
  assign in_ready = (st == S_IDLE);
  assign busy     = (st != S_IDLE);
  assign vfy_row  = row;
  assign vfy_col  = col;

  always_comb begin
    pulse = PULSE_IDLE;
    if (st == S_PULSE) begin
      pulse.valid = 1'b1;
      pulse.op    = incl ? OP_ERASE : OP_PROGRAM;
      pulse.width = PW_1MS;
      pulse.row   = row;
      pulse.col   = col;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      row <= '0; col <= '0; incl <= 1'b0; npulses <= '0;
      done <= 1'b0; done_include <= 1'b0; done_pulses <= '0; done_fail <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (in_valid) begin
          row     <= in_row;
          col     <= in_col;
          incl <= (in_state > 9'(HALF));
          npulses <= '0;
          st      <= S_VERIFY;
        end
        S_VERIFY: begin
          if (reached || npulses == 8'(MAX_PULSES)) begin
            done         <= 1'b1;
            done_include <= incl;
            done_pulses  <= npulses;
            done_fail    <= !reached;
            st           <= S_IDLE;
          end else begin
            st <= S_PULSE;
          end
        end
        S_PULSE: begin
          npulses <= npulses + 1'b1;
          st      <= S_VERIFY;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
