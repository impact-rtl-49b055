// clause_tile: the clause crossbar tile, computing n Boolean clauses from K literals.
//
// Every clause C_j = AND_i (L_i OR NOT TA_ji) is one column of a K x N Y-Flash crossbar.
// A TA action is stored as a conductance: include = HCS (> 2.4 uS), exclude = LCS (< 1 nS).
// The row MUXes put V_R on a row only when its literal is 0 and leave rows with literal 1
// floating. A column therefore draws about 5 uA for every (literal 0, include) pair it
// holds and only about 1 nA per (literal 0, exclude) pair. The column's DeMUX, selected
// by the clause decoder, routes the current to a current sense amplifier which returns
// C_j = 1 below 4.1 uA and C_j = 0 at or above it.
//
// Interface: literals are held stable during a reading cycle; read_pulse / se / dis /
// sample come from read_sequencer; grp picks the column group (all columns by default).
// clauses is a register (the "Boolean clauses" row of the tile) loaded from the CSAs on
// `sample` for the connected columns; it holds its value otherwise. The pulse and verify
// ports reach the cell array for programming the TA actions. The structure follows the
// published tile; the clause register and the grouping are this design's choices.
module clause_tile
  import impact_pkg::*;
#(
  parameter int unsigned K      = 2048,
  parameter int unsigned N      = 500,
  parameter int unsigned GROUP  = N,
  parameter int unsigned GROUPS = (N + GROUP - 1) / GROUP,
  parameter int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [K-1:0]  literals,
  input  logic          read_pulse,
  input  logic          se,
  input  logic          dis,
  input  logic          sample,
  input  logic [GW-1:0] grp,
  input  pulse_cmd_t    pulse,
  input  logic [AW-1:0] vfy_row,
  input  logic [AW-1:0] vfy_col,
  output current_t      vfy_current,
  output logic [N-1:0]  clauses
);
  logic [K-1:0] row_vr;
  logic [N-1:0] col_en;
  current_t     ic [N];
  logic [N-1:0] c, c_n;

  row_mux #(.ROWS(K), .VR_WHEN_ONE(1'b0)) u_rows (
    .sel(literals), .read_pulse(read_pulse), .row_vr(row_vr));

  column_decoder #(.COLS(N), .GROUP(GROUP)) u_dec (
    .en(read_pulse), .grp(grp), .col_en(col_en));

  yflash_crossbar #(.ROWS(K), .COLS(N)) u_xbar (
    .clk(clk), .rst_n(rst_n), .pulse(pulse), .row_vr(row_vr), .col_en(col_en),
    .col_current(ic), .vfy_row(vfy_row), .vfy_col(vfy_col), .vfy_current(vfy_current));

  for (genvar j = 0; j < N; j++) begin : gen_csa
    csa u_csa (.clk(clk), .rst_n(rst_n), .ic(ic[j]), .se(se && col_en[j]), .dis(dis),
               .c(c[j]), .c_n(c_n[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) clauses <= '0;
    else if (sample)
      for (int j = 0; j < N; j++)
        if (col_en[j]) clauses[j] <= c[j] && !c_n[j];
  end
endmodule
