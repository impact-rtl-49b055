// class_tile: the class crossbar tile, computing the weighted class sums from n clauses.
//
// Each class is a column of an N x M Y-Flash crossbar whose cells hold the unipolar clause
// weights as tuned analog conductances (weight 0 = 1 nS ... highest weight = 2.5 uS).
// The row MUXes put V_R on the rows whose clause is 1; the others float. A column current
// is then sum_j G(w_ij) * C_j * V_R, the weighted vote of the class. Each column's DeMUX
// (driven by the class decoder) routes it to an ADC, which digitises it on `sample`.
//
// Because every weight carries the same offset |W_min| and G(0) is the same for every
// cell, all class columns carry the same extra current popcount(C) * (offset), so the
// arg-max over classes is unchanged by the bipolar-to-unipolar shift.
//
// Interface: clauses stable during a reading cycle; read_pulse and sample from the
// sequencer; codes are registered, valid the clock after `sample`. The tile structure
// follows the published design; the ADC per column is this design's (see adc).
module class_tile
  import impact_pkg::*;
#(
  parameter int unsigned     N        = 500,
  parameter int unsigned     M        = 10,
  parameter int unsigned     GROUP    = M,
  parameter int unsigned     GROUPS   = (M + GROUP - 1) / GROUP,
  parameter int unsigned     GW       = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  parameter int unsigned     ADC_BITS = 20,
  parameter longint unsigned ADC_LSB  = 2385
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        clauses,
  input  logic                read_pulse,
  input  logic                sample,
  input  logic [GW-1:0]       grp,
  input  pulse_cmd_t          pulse,
  input  logic [AW-1:0]       vfy_row,
  input  logic [AW-1:0]       vfy_col,
  output current_t            vfy_current,
  output logic [ADC_BITS-1:0] codes [M]
);
  logic [N-1:0] row_vr;
  logic [M-1:0] col_en;
  current_t     ics [M];

  row_mux #(.ROWS(N), .VR_WHEN_ONE(1'b1)) u_rows (
    .sel(clauses), .read_pulse(read_pulse), .row_vr(row_vr));

  column_decoder #(.COLS(M), .GROUP(GROUP)) u_dec (
    .en(read_pulse), .grp(grp), .col_en(col_en));

  yflash_crossbar #(.ROWS(N), .COLS(M)) u_xbar (
    .clk(clk), .rst_n(rst_n), .pulse(pulse), .row_vr(row_vr), .col_en(col_en),
    .col_current(ics), .vfy_row(vfy_row), .vfy_col(vfy_col), .vfy_current(vfy_current));

  for (genvar m = 0; m < M; m++) begin : gen_adc
    adc #(.BITS(ADC_BITS), .LSB_PA(ADC_LSB)) u_adc (
      .clk(clk), .rst_n(rst_n), .sample(sample && col_en[m]), .i_in(ics[m]), .code(codes[m]));
  end
endmodule
