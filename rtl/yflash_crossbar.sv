// yflash_crossbar: behavioural model of a ROWS x COLS Y-Flash memristor crossbar.
//
// This is a model of an analog, process-specific array, not synthesizable logic. Each
// crosspoint is one two-terminal Y-Flash cell (drain to the row, sources to the column)
// held as an integer conductance in pS. The cells are self-selecting, so no selector or
// sneak path is modelled: a column current is the sum, over rows driven at V_R, of
// G * V_R (Ohm's law at each crosspoint, Kirchhoff's current law on the column). A
// floating row ('Z') or a column whose DeMUX is open contributes nothing.
//
// Programming: one pulse_cmd_t per clock addresses one cell. A program pulse lowers G,
// an erase pulse raises it; the change depends on the pulse width code (1 ms, 500 us,
// 50 us). The device physics is not published in a usable form, so the response is this
// model's own: program removes 3/4, 1/2 or 1/8 of G, erase adds 3/4, 1/2 or 1/8 of the
// distance to a 2.6 uS saturation. With these, a fully erased cell (2.5 uS) reaches
// LCS < 1 nS in six 1 ms program pulses, close to the published mean of about seven.
// Cycle-to-cycle and device-to-device variation are not modelled. A pulse is applied in
// one clock; its real duration is carried only by the width code.
//
// Read: while any row is driven, col_current is updated every clock (registered, so a
// current appears one clock after the rows are driven; the reading cycle waits 2 ns
// before sensing). When no row is driven the currents read 0. A separate verify port
// returns the current of one cell at V_R, as the write-verify loops need.
// Reset (asynchronous, active low) erases every cell to G_INIT_PS.
module yflash_crossbar
  import impact_pkg::*;
#(
  parameter int unsigned ROWS      = 2048,
  parameter int unsigned COLS      = 500,
  parameter int unsigned G_INIT_PS = G_ERASED_PS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  pulse_cmd_t          pulse,
  input  logic [ROWS-1:0]     row_vr,
  input  logic [COLS-1:0]     col_en,
  output current_t            col_current [COLS],
  input  logic [AW-1:0]       vfy_row,
  input  logic [AW-1:0]       vfy_col,
  output current_t            vfy_current
);
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1;

  cond_t g [ROWS][COLS];  // cell conductances, pS
  logic [RW-1:0] prow, vrow;  // addresses cut to the array size (range checked below)
  logic [CW-1:0] pcol, vcol;

  assign prow = pulse.row[RW-1:0];
  assign pcol = pulse.col[CW-1:0];
  assign vrow = vfy_row[RW-1:0];
  assign vcol = vfy_col[CW-1:0];

  function automatic cond_t after_pulse(cond_t g0, pulse_op_t op, pulse_width_t w);
    cond_t d, gn;
    if (op == OP_PROGRAM) begin
      unique case (w)
        PW_1MS:   gn = g0 - (g0 >> 1) - (g0 >> 2);
        PW_500US: gn = g0 - (g0 >> 1);
        default:  gn = g0 - (g0 >> 3);
      endcase
      if (gn < G_FLOOR_PS) gn = G_FLOOR_PS;
    end else begin
      d = (g0 < G_SAT_PS) ? cond_t'(G_SAT_PS) - g0 : '0;
      unique case (w)
        PW_1MS:   gn = g0 + d - (d >> 2);
        PW_500US: gn = g0 + (d >> 1);
        default:  gn = g0 + (d >> 3);
      endcase
    end
    return gn;
  endfunction

  // Cell array: reset erase and single-cell pulses.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          g[r][c] <= cond_t'(G_INIT_PS);
    end else if (pulse.valid && (int'(pulse.row) < ROWS) && (int'(pulse.col) < COLS)) begin
      g[prow][pcol] <= after_pulse(g[prow][pcol], pulse.op, pulse.width);
    end
  end

  // Column currents during a read.
  always_ff @(posedge clk or negedge rst_n) begin : read_port
    current_t acc [COLS];
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) col_current[c] <= '0;
    end else if (row_vr == '0) begin
      for (int c = 0; c < COLS; c++) col_current[c] <= '0;
    end else begin
      for (int c = 0; c < COLS; c++) acc[c] = '0;
      for (int r = 0; r < ROWS; r++)
        if (row_vr[r])
          for (int c = 0; c < COLS; c++)
            acc[c] = acc[c] + cell_current(g[r][c]);
      for (int c = 0; c < COLS; c++) col_current[c] <= col_en[c] ? acc[c] : '0;
    end
  end

  always_comb begin
    if ((int'(vfy_row) < ROWS) && (int'(vfy_col) < COLS))
      vfy_current = cell_current(g[vrow][vcol]);
    else
      vfy_current = '0;
  end
endmodule
