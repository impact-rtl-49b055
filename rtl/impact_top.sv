// impact_top: IMPACT, an in-memory inference engine for the coalesced Tsetlin machine.
//
// Inference is two crossbar levels. The clause level holds the Tsetlin-automaton actions
// of all clauses in Y-Flash clause tiles (K literal rows x N clause columns each) and
// turns the literal vector into N Boolean clauses in one 5 ns reading cycle. The class
// level holds the clause weights as analog conductances in class tiles (N clause rows x
// M class columns) and turns the clauses into M weighted class sums in a second reading
// cycle; an arg-max picks the class.
//
// Tiling: a model with more literals than K uses X clause tiles per clause group, whose
// partial clauses are ANDed; a model with more clauses than N uses J clause groups, each
// with its own class tile, whose digitised partial class sums are added. X = J = 1 is
// the single 2048 x 500 clause tile and 500 x 10 class tile evaluated on MNIST.
//
// Literals: the F = X*K/2 binarised features come in on `features`; literal i is
// feature i and literal F+i its negation, so exactly half of all literals are 0, which
// bounds the leakage current a clause column can collect.
//
// Programming (before inference, one stream at a time):
//  * TA stream (ta_*): global literal row, global clause column and trained TA state;
//    ta_programmer stores include/exclude as HCS/LCS with 1 ms write-verify pulses.
//  * weight stream (w_*): signed weights of clause w_row for class w_col. Send every
//    weight once with w_scan = 1 (finds W_min), then again with w_scan = 0; the second
//    pass shifts each weight by |W_min| and weight_tuner writes it (pre- and fine-tune).
// Inference: in_valid/in_ready with `features`; out_valid pulses with out_class, the
// class sums and the clause vector. Latency: 2 * (READ_CYCLES + 1) + 2 clocks from the
// accepted request to out_valid with the default one column group per tile (500 ps
// clock: 11 ns). Tile structure and programming flows follow the published design; the
// interfaces, the clock, the ADCs and the digital arg-max are this design's choices.
module impact_top
  import impact_pkg::*;
#(
  parameter int unsigned     K        = 2048,
  parameter int unsigned     N        = 500,
  parameter int unsigned     M        = 10,
  parameter int unsigned     X        = 1,
  parameter int unsigned     J        = 1,
  parameter int unsigned     CL_GROUP = N,
  parameter int unsigned     CS_GROUP = M,
  parameter int unsigned     ADC_BITS = 20,
  parameter longint unsigned ADC_LSB  = 2385,
  parameter int unsigned     WMAX     = 419,
  parameter int unsigned     WB       = 12,
  parameter int unsigned     F        = X * K / 2,
  parameter int unsigned     SW       = ADC_BITS + ((J > 1) ? $clog2(J) : 0),
  parameter int unsigned     CW       = (M > 1) ? $clog2(M) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // inference
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [F-1:0]         features,
  output logic                 out_valid,
  output logic [CW-1:0]        out_class,
  output logic [SW-1:0]        out_sums [M],
  output logic [J*N-1:0]       out_clauses,
  // TA programming stream
  input  logic                 ta_valid,
  output logic                 ta_ready,
  input  logic [AW-1:0]        ta_row,
  input  logic [AW-1:0]        ta_col,
  input  logic [8:0]           ta_state,
  output logic                 ta_done,
  output logic                 ta_done_include,
  output logic [7:0]           ta_done_pulses,
  output logic                 ta_done_fail,
  // weight programming stream
  input  logic                 w_valid,
  output logic                 w_ready,
  input  logic                 w_scan,
  input  logic                 w_clear,
  input  logic [AW-1:0]        w_row,
  input  logic [AW-1:0]        w_col,
  input  logic signed [WB-1:0] w_value,
  output logic signed [WB-1:0] w_min,
  output logic                 w_done,
  output logic                 w_done_miss,
  output logic [4:0]           w_done_pre_prog,
  output logic [4:0]           w_done_pre_erase,
  output logic [4:0]           w_done_fine
);
  localparam int unsigned CL_GROUPS = (N + CL_GROUP - 1) / CL_GROUP;
  localparam int unsigned CS_GROUPS = (M + CS_GROUP - 1) / CS_GROUP;
  localparam int unsigned CL_GW     = (CL_GROUPS > 1) ? $clog2(CL_GROUPS) : 1;
  localparam int unsigned CS_GW     = (CS_GROUPS > 1) ? $clog2(CS_GROUPS) : 1;

  // ---------------- control ----------------
  logic ctrl_busy, ta_busy, wt_busy, sums_valid;
  logic cl_rp, cl_se, cl_dis, cl_sample, cs_rp, cs_sample;
  logic [CL_GW-1:0] cl_grp;
  logic [CS_GW-1:0] cs_grp;
  logic start;

  assign in_ready = !ctrl_busy && !ta_busy && !wt_busy && !ta_valid && !w_valid;
  assign start    = in_valid && in_ready;

  impact_ctrl #(.CL_GROUPS(CL_GROUPS), .CS_GROUPS(CS_GROUPS)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(ctrl_busy),
    .cl_read_pulse(cl_rp), .cl_se(cl_se), .cl_dis(cl_dis), .cl_sample(cl_sample), .cl_grp(cl_grp),
    .cs_read_pulse(cs_rp), .cs_sample(cs_sample), .cs_grp(cs_grp), .sums_valid(sums_valid));

  // ---------------- literals ----------------
  logic [F-1:0]   feat_q;
  logic [2*F-1:0] literals;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     feat_q <= '0;
    else if (start) feat_q <= features;
  end
  assign literals = {~feat_q, feat_q};

  // ---------------- programming ----------------
  pulse_cmd_t    ta_pulse, wt_pulse;
  logic [AW-1:0] ta_vrow, ta_vcol, wt_vrow, wt_vcol;
  current_t      ta_vcur, wt_vcur;
  logic          ta_in_ready, wt_in_ready;
  logic [WB-1:0] w_unipolar;

  assign ta_ready = ta_in_ready && !ctrl_busy && !wt_busy;
  assign w_ready  = w_scan ? (!ctrl_busy && !ta_busy && !wt_busy)
                           : (wt_in_ready && !ctrl_busy && !ta_busy);

  ta_programmer u_ta (
    .clk(clk), .rst_n(rst_n), .in_valid(ta_valid && ta_ready), .in_ready(ta_in_ready),
    .in_row(ta_row), .in_col(ta_col), .in_state(ta_state),
    .pulse(ta_pulse), .vfy_row(ta_vrow), .vfy_col(ta_vcol), .vfy_current(ta_vcur),
    .busy(ta_busy), .done(ta_done), .done_include(ta_done_include),
    .done_pulses(ta_done_pulses), .done_fail(ta_done_fail));

  weight_offset #(.WB(WB)) u_woff (
    .clk(clk), .rst_n(rst_n), .clear(w_clear), .scan_valid(w_valid && w_ready && w_scan),
    .scan_w(w_value), .w_in(w_value), .w_out(w_unipolar), .wmin(w_min));

  weight_tuner #(.WMAX(WMAX), .WW(WB)) u_wt (
    .clk(clk), .rst_n(rst_n), .in_valid(w_valid && w_ready && !w_scan), .in_ready(wt_in_ready),
    .in_row(w_row), .in_col(w_col), .in_w(w_unipolar),
    .pulse(wt_pulse), .vfy_row(wt_vrow), .vfy_col(wt_vcol), .vfy_current(wt_vcur),
    .busy(wt_busy), .done(w_done), .done_miss(w_done_miss), .done_pre_prog(w_done_pre_prog),
    .done_pre_erase(w_done_pre_erase), .done_fine(w_done_fine));

  // Global TA address -> clause tile (x, j) and local cell.
  int unsigned ta_px, ta_pj, ta_vx, ta_vj, wt_pj, wt_vj;
  pulse_cmd_t  ta_local, wt_local;
  logic [AW-1:0] ta_vrow_l, ta_vcol_l, wt_vrow_l;

  always_comb begin
    ta_px = int'(ta_pulse.row) / K;
    ta_pj = int'(ta_pulse.col) / N;
    ta_local     = ta_pulse;
    ta_local.row = AW'(int'(ta_pulse.row) % K);
    ta_local.col = AW'(int'(ta_pulse.col) % N);
    ta_vx     = int'(ta_vrow) / K;
    ta_vj     = int'(ta_vcol) / N;
    ta_vrow_l = AW'(int'(ta_vrow) % K);
    ta_vcol_l = AW'(int'(ta_vcol) % N);
    wt_pj = int'(wt_pulse.row) / N;
    wt_local     = wt_pulse;
    wt_local.row = AW'(int'(wt_pulse.row) % N);
    wt_vj     = int'(wt_vrow) / N;
    wt_vrow_l = AW'(int'(wt_vrow) % N);
  end

  // ---------------- clause level ----------------
  logic [N-1:0] partial [J][X];
  logic [N-1:0] clauses [J];
  current_t     cl_vcur [X][J];

  for (genvar x = 0; x < X; x++) begin : gen_clx
    for (genvar j = 0; j < J; j++) begin : gen_clj
      pulse_cmd_t p;
      always_comb begin
        p = ta_local;
        p.valid = ta_local.valid && (ta_px == x) && (ta_pj == j);
      end
      clause_tile #(.K(K), .N(N), .GROUP(CL_GROUP)) u_tile (
        .clk(clk), .rst_n(rst_n), .literals(literals[x*K +: K]),
        .read_pulse(cl_rp), .se(cl_se), .dis(cl_dis), .sample(cl_sample), .grp(cl_grp),
        .pulse(p), .vfy_row(ta_vrow_l), .vfy_col(ta_vcol_l), .vfy_current(cl_vcur[x][j]),
        .clauses(partial[j][x]));
    end
  end

  for (genvar j = 0; j < J; j++) begin : gen_and
    partial_clause_and #(.X(X), .N(N)) u_and (.partial(partial[j]), .clauses(clauses[j]));
    assign out_clauses[j*N +: N] = clauses[j];
  end

  always_comb begin
    ta_vcur = '0;
    for (int x = 0; x < X; x++)
      for (int j = 0; j < J; j++)
        if (ta_vx == x && ta_vj == j) ta_vcur = cl_vcur[x][j];
  end

  // ---------------- class level ----------------
  logic [ADC_BITS-1:0] codes [J][M];
  current_t            cs_vcur [J];
  logic [SW-1:0]       sums [M];

  for (genvar j = 0; j < J; j++) begin : gen_cs
    pulse_cmd_t p;
    always_comb begin
      p = wt_local;
      p.valid = wt_local.valid && (wt_pj == j);
    end
    class_tile #(.N(N), .M(M), .GROUP(CS_GROUP), .ADC_BITS(ADC_BITS), .ADC_LSB(ADC_LSB)) u_tile (
      .clk(clk), .rst_n(rst_n), .clauses(clauses[j]), .read_pulse(cs_rp), .sample(cs_sample),
      .grp(cs_grp), .pulse(p), .vfy_row(wt_vrow_l), .vfy_col(wt_vcol), .vfy_current(cs_vcur[j]),
      .codes(codes[j]));
  end

  always_comb begin
    wt_vcur = '0;
    for (int j = 0; j < J; j++)
      if (wt_vj == j) wt_vcur = cs_vcur[j];
  end

  partial_class_sum #(.J(J), .M(M), .BITS(ADC_BITS), .SW(SW)) u_sum (.partial(codes), .sums(sums));

  logic [SW-1:0] max_sum;
  argmax #(.M(M), .W(SW)) u_argmax (
    .clk(clk), .rst_n(rst_n), .valid(sums_valid), .sums(sums),
    .out_valid(out_valid), .cls(out_class), .max_sum(max_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++) out_sums[m] <= '0;
    end else if (sums_valid) begin
      out_sums <= sums;
    end
  end

  // One programming source at a time on the shared pulse path.
  assert property (@(posedge clk) disable iff (!rst_n) !(ta_pulse.valid && wt_pulse.valid));
endmodule
