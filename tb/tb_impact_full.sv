// tb_impact_full: one complete operation of IMPACT at its published size, with every
// parameter of the top at its default: one 2048-literal x 500-clause clause tile and one
// 500-clause x 10-class class tile (X = J = 1), 1024 features.
//
// Flow:
//  (1) TA programming. The model has the shape of the MNIST one: 784 features, i.e.
//      1568 literals (feature i on row i, its negation on row 1024 + i), 500 clauses and
//      10 classes; rows 784..1023 and 1808..2047 are unused and hold exclude everywhere.
//      The array comes out of reset erased, i.e. every TA reads as include. Every one of
//      the 500 clauses is given NINC random included literals
//      (never a feature together with its negation) and all 2048 TAs of every clause are
//      written through the TA stream, 1,024,000 write-verify operations in all. (With
//      NA < N the clauses from NA on keep their erased all-include state and always
//      evaluate to 0.)
//  (2) Weights. All 500 x 10 signed weights are streamed, once to scan for W_min and once
//      to tune the class cells.
//  (3) Inference. Feature vectors built to satisfy a random subset of the active clauses
//      are classified. The bench computes clauses, class sums (from the conductances the
//      tuning left in the class cells, at the 2385 pA ADC step) and the arg-max on its
//      own and compares them, and checks the latency of 2 * 11 + 2 clocks.
// Mechanisms counted (each must occur): include and exclude writes, pre-tune programming,
// fine-tune pulses, clause 0 and clause 1 outputs, a class sum above zero.
// Runtime with plain verilator: about 3 minutes.
module tb_impact_full;
  import impact_pkg::*;
  localparam int K = 2048, N = 500, M = 10, F = K / 2;
  localparam int NA = N, NINC = 3;   // active clauses, included literals per active clause
  localparam int FU = 784;           // features used: an MNIST-shaped model, 28 x 28 = 784
  localparam longint LSB = 2385;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [F-1:0] features = '0;
  logic [3:0] out_class;
  logic [19:0] out_sums [M];
  logic [N-1:0] out_clauses;
  logic ta_valid = 0, ta_ready, ta_done, ta_inc, ta_fail;
  logic [AW-1:0] ta_row = '0, ta_col = '0, w_row = '0, w_col = '0;
  logic [8:0] ta_state = '0;
  logic [7:0] ta_pulses;
  logic w_valid = 0, w_ready, w_scan = 0, w_clear = 0, w_done, w_miss;
  logic signed [11:0] w_value = '0, w_min;
  logic [4:0] w_pp, w_pe, w_pf;
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  impact_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .features(features),
    .out_valid(out_valid), .out_class(out_class), .out_sums(out_sums), .out_clauses(out_clauses),
    .ta_valid(ta_valid), .ta_ready(ta_ready), .ta_row(ta_row), .ta_col(ta_col), .ta_state(ta_state),
    .ta_done(ta_done), .ta_done_include(ta_inc), .ta_done_pulses(ta_pulses), .ta_done_fail(ta_fail),
    .w_valid(w_valid), .w_ready(w_ready), .w_scan(w_scan), .w_clear(w_clear), .w_row(w_row), .w_col(w_col),
    .w_value(w_value), .w_min(w_min), .w_done(w_done), .w_done_miss(w_miss), .w_done_pre_prog(w_pp),
    .w_done_pre_erase(w_pe), .w_done_fine(w_pf));

  int inc_lit [NA][NINC];   // included literals of the active clauses
  int w [N][M];
  longint unsigned g [N][M];
  int n_inc = 0, n_exc = 0, n_pre_prog = 0, n_fine = 0, n_c0 = 0, n_c1 = 0, n_sum = 0;

  task automatic check(bit ok);
    checks++;
    if (!ok) failures++;
  endtask

  function automatic bit is_included(int i, int j);
    if (j >= NA) return 1'b1;
    for (int k = 0; k < NINC; k++) if (inc_lit[j][k] == i) return 1'b1;
    return 1'b0;
  endfunction

  task automatic write_ta(int i, int j, int s);
    @(negedge clk);
    ta_valid = 1; ta_row = AW'(i); ta_col = AW'(j); ta_state = 9'(s);
    do @(negedge clk); while (!ta_ready);
    ta_valid = 0;
    while (!ta_done) @(negedge clk);
    check(ta_inc == (s > 128) && !ta_fail);
    if (ta_inc) n_inc++; else n_exc++;
  endtask

  initial begin
    int mn;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // (1) TA actions of the active clauses
    for (int j = 0; j < NA; j++)
      for (int k = 0; k < NINC; k++) begin
        int i;
        bit dup;
        do begin
          i = $urandom_range(0, 2 * FU - 1);
          if (i >= FU) i = i - FU + F;   // negated feature i - FU
          dup = 1'b0;
          // never both a feature and its negation, never twice
          for (int q = 0; q < k; q++)
            if (inc_lit[j][q] == i || inc_lit[j][q] % F == i % F) dup = 1'b1;
        end while (dup);
        inc_lit[j][k] = i;
      end
    for (int j = 0; j < NA; j++)
      for (int i = 0; i < K; i++)
        write_ta(i, j, is_included(i, j) ? $urandom_range(129, 256) : $urandom_range(1, 128));

    // (2) weights: scan pass, then write pass
    @(negedge clk); w_clear = 1; @(negedge clk); w_clear = 0;
    for (int j = 0; j < N; j++)
      for (int m = 0; m < M; m++) begin
        w[j][m] = $urandom_range(0, 419) - 210;
        w_valid = 1; w_scan = 1; w_value = 12'(w[j][m]);
        @(negedge clk);
      end
    w_valid = 0; w_scan = 0;
    mn = 0;
    for (int j = 0; j < N; j++) for (int m = 0; m < M; m++) if (w[j][m] < mn) mn = w[j][m];
    @(negedge clk);
    check(int'(w_min) == mn);
    for (int j = 0; j < N; j++)
      for (int m = 0; m < M; m++) begin
        @(negedge clk);
        w_valid = 1; w_scan = 0; w_row = AW'(j); w_col = AW'(m); w_value = 12'(w[j][m]);
        do @(negedge clk); while (!w_ready);
        w_valid = 0;
        while (!w_done) @(negedge clk);
        n_pre_prog += int'(w_pp); n_fine += int'(w_pf);
        check(int'(w_pp) + int'(w_pe) <= 10 && int'(w_pf) <= 6);
      end
    for (int r = 0; r < N; r++)
      for (int m = 0; m < M; m++) g[r][m] = longint'(dut.gen_cs[0].u_tile.u_xbar.g[r][m]);

    // (3) inferences
    for (int t = 0; t < 6; t++) begin
      logic [K-1:0] lit;
      logic [N-1:0] cexp;
      longint unsigned cur;
      longint esum [M];
      int lat, ecls;
      features = F'({32{$urandom}});
      // satisfy a random subset of the active clauses
      for (int j = 0; j < NA; j++)
        if ($urandom_range(0, 1) == 1)
          for (int k = 0; k < NINC; k++)
            features[inc_lit[j][k] % F] = (inc_lit[j][k] < F);
      lit = {~features, features};
      for (int j = 0; j < N; j++) begin
        cexp[j] = 1'b1;
        if (j >= NA) cexp[j] = 1'b0;   // includes both x and ~x
        else for (int k = 0; k < NINC; k++) if (!lit[inc_lit[j][k]]) cexp[j] = 1'b0;
      end
      ecls = 0;
      for (int m = 0; m < M; m++) begin
        cur = 0;
        for (int r = 0; r < N; r++) if (cexp[r]) cur += 2 * g[r][m];
        esum[m] = longint'(cur / LSB);
        if (esum[m] > esum[ecls]) ecls = m;
        if (esum[m] > 0) n_sum++;
      end
      @(negedge clk);
      check(in_ready);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      lat = 0;
      while (!out_valid && lat < 500) begin @(negedge clk); lat++; end
      check(lat == 2 * 11 + 2);
      check(out_clauses == cexp);
      for (int m = 0; m < M; m++) check(longint'(out_sums[m]) == esum[m]);
      check(int'(out_class) == ecls);
      for (int j = 0; j < N; j++) if (cexp[j]) n_c1++; else n_c0++;
    end
    $display("mechanisms: include=%0d exclude=%0d pre_prog=%0d fine=%0d clause0=%0d clause1=%0d nonzero_sums=%0d",
             n_inc, n_exc, n_pre_prog, n_fine, n_c0, n_c1, n_sum);
    check(n_inc > 0); check(n_exc > 0); check(n_pre_prog > 0); check(n_fine > 0);
    check(n_c0 > 0); check(n_c1 > 0); check(n_sum > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (40000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
