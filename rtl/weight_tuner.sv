// weight_tuner: writes one unipolar clause weight into a class-tile cell.
//
// The cell's conductance range G_MIN .. G_MAX (1 nS .. 2.5 uS) is split into WMAX equal
// segments, one per weight level: weight w targets G(w) = G_MIN + w * (G_MAX - G_MIN) / WMAX.
// Tuning runs in two write-verify stages, as published:
//   pre-tune : 500 us pulses until the cell is within +-PRE_TOL (20) segments of G(w),
//              at most PRE_MAX (10) pulses;
//   fine-tune: 50 us pulses until it is within +-FINE_TOL (5) segments,
//              at most FINE_MAX (6) pulses.
// Each step reads the cell at V_R first: above the window it gets a program pulse (lowers
// G), below it an erase pulse (raises G), inside it the stage ends. A cell still outside
// the fine window after both budgets is reported as a miss; the fraction of misses is
// the mapping cost. The window test compares currents (I = 2 V * G) with precomputed
// bounds, so no division is needed.
//
// Interface: valid/ready stream of (row, col, w). `done` pulses with the pulse counts and
// `miss`. Timing: 1 clock to accept, 2 clocks per pulse, 1 clock per stage end.
module weight_tuner
  import impact_pkg::*;
#(
  parameter int unsigned WMAX     = 419,
  parameter int unsigned PRE_TOL  = 20,
  parameter int unsigned FINE_TOL = 5,
  parameter int unsigned PRE_MAX  = 10,
  parameter int unsigned FINE_MAX = 6,
  parameter int unsigned G_MIN_PS = G_RANGE_MIN_PS,
  parameter int unsigned G_MAX_PS = G_RANGE_MAX_PS,
  parameter int unsigned WW       = 9
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [AW-1:0] in_row,
  input  logic [AW-1:0] in_col,
  input  logic [WW-1:0] in_w,
  output pulse_cmd_t    pulse,
  output logic [AW-1:0] vfy_row,
  output logic [AW-1:0] vfy_col,
  input  current_t      vfy_current,
  output logic          busy,
  output logic          done,
  output logic          done_miss,
  output logic [4:0]    done_pre_prog,
  output logic [4:0]    done_pre_erase,
  output logic [4:0]    done_fine
);
  localparam longint unsigned STEP_PS = (longint'(G_MAX_PS) - longint'(G_MIN_PS)) / longint'(WMAX);

  typedef enum logic [2:0] { S_IDLE, S_PRE_V, S_PRE_P, S_FINE_V, S_FINE_P } state_t;
  state_t        st;
  logic [AW-1:0] row, col;
  logic [WW-1:0] w;
  logic [4:0]    n_pre_prog, n_pre_erase, n_fine;
  pulse_op_t     op_q;

  // Segment bound -> current bound at V_R.
  function automatic current_t seg_current(longint seg);
    return current_t'((longint'(G_MIN_PS) + seg * longint'(STEP_PS)) * VR_VOLTS);
  endfunction

  logic     fine;
  longint   tol, lo_seg;
  current_t i_lo, i_hi;
  logic     above, below;

  always_comb begin
    fine   = (st == S_FINE_V) || (st == S_FINE_P);
    tol    = fine ? longint'(FINE_TOL) : longint'(PRE_TOL);
    lo_seg = longint'(w) - tol;
    i_lo   = (lo_seg <= 0) ? '0 : seg_current(lo_seg);
    i_hi   = seg_current(longint'(w) + tol);
    above  = vfy_current > i_hi;
    below  = vfy_current < i_lo;
  end

  assign in_ready = (st == S_IDLE);
  assign busy     = (st != S_IDLE);
  assign vfy_row  = row;
  assign vfy_col  = col;

  always_comb begin
    pulse = PULSE_IDLE;
    if (st == S_PRE_P || st == S_FINE_P) begin
      pulse.valid = 1'b1;
      pulse.op    = op_q;
      pulse.width = (st == S_PRE_P) ? PW_500US : PW_50US;
      pulse.row   = row;
      pulse.col   = col;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; row <= '0; col <= '0; w <= '0; op_q <= OP_PROGRAM;
      n_pre_prog <= '0; n_pre_erase <= '0; n_fine <= '0;
      done <= 1'b0; done_miss <= 1'b0;
      done_pre_prog <= '0; done_pre_erase <= '0; done_fine <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (in_valid) begin
          row <= in_row; col <= in_col; w <= in_w;
          n_pre_prog <= '0; n_pre_erase <= '0; n_fine <= '0;
          st <= S_PRE_V;
        end
        S_PRE_V: begin
          if ((!above && !below) || (n_pre_prog + n_pre_erase) == 5'(PRE_MAX)) st <= S_FINE_V;
          else begin
            op_q <= above ? OP_PROGRAM : OP_ERASE;
            st   <= S_PRE_P;
          end
        end
        S_PRE_P: begin
          if (op_q == OP_PROGRAM) n_pre_prog <= n_pre_prog + 1'b1;
          else                    n_pre_erase <= n_pre_erase + 1'b1;
          st <= S_PRE_V;
        end
        S_FINE_V: begin
          if ((!above && !below) || n_fine == 5'(FINE_MAX)) begin
            done           <= 1'b1;
            done_miss      <= above || below;
            done_pre_prog  <= n_pre_prog;
            done_pre_erase <= n_pre_erase;
            done_fine      <= n_fine;
            st             <= S_IDLE;
          end else begin
            op_q <= above ? OP_PROGRAM : OP_ERASE;
            st   <= S_FINE_P;
          end
        end
        S_FINE_P: begin
          n_fine <= n_fine + 1'b1;
          st     <= S_FINE_V;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
