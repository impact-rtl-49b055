// tb_clause_tile: a 16-literal x 8-clause tile. Random TA actions are written by
// applying 1 ms program pulses to exclude cells until they are below 1 nS (include
// cells stay erased). Literal vectors are then applied through full reading cycles and
// the clause register is compared with C_j = AND_i (L_i OR NOT TA_ij). Clause 0 always
// has all TAs excluded, so its column collects only leakage and must read 1. A second
// instance with two column groups checks that only the selected group is updated.
module tb_clause_tile;
  import impact_pkg::*;
  localparam int K = 16, N = 8;
  logic clk = 0, rst_n = 0;
  logic [K-1:0] lit;
  logic start, rp, se, dis, sample, done, busy;
  logic grp;
  pulse_cmd_t pulse;
  logic [AW-1:0] vr = '0, vc = '0;
  current_t vcur, vcur2;
  logic [N-1:0] clauses, clauses2;
  bit ta [K][N];
  int checks = 0, failures = 0;
  int n0 = 0, n1 = 0;
  always #250ps clk = ~clk;

  read_sequencer u_seq (.clk(clk), .rst_n(rst_n), .start(start), .read_pulse(rp), .se(se), .dis(dis),
                        .sample(sample), .done(done), .busy(busy));
  clause_tile #(.K(K), .N(N)) dut (.clk(clk), .rst_n(rst_n), .literals(lit), .read_pulse(rp), .se(se),
    .dis(dis), .sample(sample), .grp(1'b0), .pulse(pulse), .vfy_row(vr), .vfy_col(vc),
    .vfy_current(vcur), .clauses(clauses));
  clause_tile #(.K(K), .N(N), .GROUP(4)) dut2 (.clk(clk), .rst_n(rst_n), .literals(lit), .read_pulse(rp),
    .se(se), .dis(dis), .sample(sample), .grp(grp), .pulse(pulse), .vfy_row(vr), .vfy_col(vc),
    .vfy_current(vcur2), .clauses(clauses2));

  task automatic read_cycle();
    start <= 1; @(posedge clk); start <= 0;
    do @(posedge clk); while (!done);
    @(negedge clk);
  endtask

  initial begin
    logic [N-1:0] exp_c, prev2;
    start = 0; pulse = PULSE_IDLE; lit = '0; grp = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < K; i++)
      for (int j = 0; j < N; j++) begin
        ta[i][j] = (j != 0) && ($urandom_range(0, 9) == 0);
        if (!ta[i][j])
          for (int p = 0; p < 6; p++) begin
            pulse.valid <= 1; pulse.op <= OP_PROGRAM; pulse.width <= PW_1MS;
            pulse.row <= AW'(i); pulse.col <= AW'(j);
            @(posedge clk);
          end
      end
    pulse.valid <= 0;
    @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < K/2; i++) begin
        lit[i] = (t % 3 == 0) ? 1'b1 : 1'($urandom_range(0, 1));
        lit[K/2 + i] = ~lit[i];
      end
      grp = t[0];
      prev2 = clauses2;
      read_cycle();
      for (int j = 0; j < N; j++) begin
        exp_c[j] = 1'b1;
        for (int i = 0; i < K; i++) if (ta[i][j] && !lit[i]) exp_c[j] = 1'b0;
      end
      for (int j = 0; j < N; j++) begin
        checks += 2;
        if (clauses[j] !== exp_c[j]) failures++;
        if (exp_c[j]) n1++; else n0++;
        if ((j / 4) == int'(grp)) begin if (clauses2[j] !== exp_c[j]) failures++; end
        else if (clauses2[j] !== prev2[j]) failures++;
      end
    end
    checks++; if (n0 == 0 || n1 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
