// tb_impact_top: end-to-end run of a small tiled IMPACT: 16-literal x 8-clause clause
// tiles, 2 literal tiles (X) x 2 clause groups (J), 4 classes, clause columns read in
// two groups of 4 and class columns in two groups of 2.
//
// Flow: (1) every TA of a random model is streamed in and written (include/exclude);
// (2) random signed weights are streamed twice, scan then write, and tuned into the
// class tiles; (3) random feature vectors are classified. For each inference the bench
// computes, independently of the design:
//   * the clauses C_j = AND_i (L_i OR NOT TA_ij) with L = {~features, features};
//   * the class sums from the conductances actually left in the class cells after
//     tuning: sum over tiles of floor(sum_r C_r * 2 V * G_rm / LSB);
//   * the arg-max of those sums (lowest index on ties),
// and checks clauses, sums, class and the latency (4 reading cycles of 11 clocks + 2).
// It also compares the class with the software CoTM (arg-max of the signed W . C) and
// requires agreement on at least 3/4 of the inferences, since tuning leaves each weight
// up to a few segments off. Every mechanism (include and exclude writes, pre-tune
// program and erase, fine-tune, a tuning miss, clause 0 and 1, an AND that a single
// literal tile would have got wrong, both class tiles contributing) is counted and must
// happen at least once.
module tb_impact_top;
  import impact_pkg::*;
  localparam int K = 16, N = 8, M = 4, X = 2, J = 2, F = X * K / 2, NL = X * K, NC = J * N;
  localparam longint LSB = 2385;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [F-1:0] features = '0;
  logic [1:0] out_class;
  logic [20:0] out_sums [M];
  logic [NC-1:0] out_clauses;
  logic ta_valid = 0, ta_ready, ta_done, ta_inc, ta_fail;
  logic [AW-1:0] ta_row = '0, ta_col = '0, w_row = '0, w_col = '0;
  logic [8:0] ta_state = '0;
  logic [7:0] ta_pulses;
  logic w_valid = 0, w_ready, w_scan = 0, w_clear = 0, w_done, w_miss;
  logic signed [11:0] w_value = '0, w_min;
  logic [4:0] w_pp, w_pe, w_pf;
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  impact_top #(.K(K), .N(N), .M(M), .X(X), .J(J), .CL_GROUP(4), .CS_GROUP(2)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .features(features),
    .out_valid(out_valid), .out_class(out_class), .out_sums(out_sums), .out_clauses(out_clauses),
    .ta_valid(ta_valid), .ta_ready(ta_ready), .ta_row(ta_row), .ta_col(ta_col), .ta_state(ta_state),
    .ta_done(ta_done), .ta_done_include(ta_inc), .ta_done_pulses(ta_pulses), .ta_done_fail(ta_fail),
    .w_valid(w_valid), .w_ready(w_ready), .w_scan(w_scan), .w_clear(w_clear), .w_row(w_row), .w_col(w_col),
    .w_value(w_value), .w_min(w_min), .w_done(w_done), .w_done_miss(w_miss), .w_done_pre_prog(w_pp),
    .w_done_pre_erase(w_pe), .w_done_fine(w_pf));

  bit ta [NL][NC];
  int w [NC][M];
  longint unsigned g [J][N][M];
  // mechanism counters
  int n_inc = 0, n_exc = 0, n_pre_prog = 0, n_pre_erase = 0, n_fine = 0, n_miss = 0;
  int n_c0 = 0, n_c1 = 0, n_and = 0, n_tile1 = 0, n_agree = 0, n_inf = 0;

  task automatic check(bit ok);
    checks++;
    if (!ok) failures++;
  endtask

  task automatic read_class_cells();
    for (int r = 0; r < N; r++)
      for (int m = 0; m < M; m++) begin
        g[0][r][m] = longint'(dut.gen_cs[0].u_tile.u_xbar.g[r][m]);
        g[1][r][m] = longint'(dut.gen_cs[1].u_tile.u_xbar.g[r][m]);
      end
  endtask

  task automatic write_weight(int j, int m);
    @(negedge clk);
    w_valid = 1; w_scan = 0; w_row = AW'(j); w_col = AW'(m); w_value = 12'(w[j][m]);
    do @(negedge clk); while (!w_ready);
    w_valid = 0;
    while (!w_done) @(negedge clk);
    n_pre_prog += int'(w_pp); n_pre_erase += int'(w_pe); n_fine += int'(w_pf);
    if (w_miss) n_miss++;
    check(int'(w_pp) + int'(w_pe) <= 10 && int'(w_pf) <= 6);
  endtask

  initial begin
    int mn;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // (1) TA actions
    for (int i = 0; i < NL; i++)
      for (int j = 0; j < NC; j++) begin
        int s;
        s = ($urandom_range(0, 5) == 0) ? $urandom_range(129, 256) : $urandom_range(1, 128);
        ta[i][j] = (s > 128);
        @(negedge clk);
        ta_valid = 1; ta_row = AW'(i); ta_col = AW'(j); ta_state = 9'(s);
        do @(negedge clk); while (!ta_ready);
        ta_valid = 0;
        while (!ta_done) @(negedge clk);
        check(ta_inc == ta[i][j] && !ta_fail);
        if (ta_inc) n_inc++; else n_exc++;
      end

    // (2) weights: scan pass, then write pass
    @(negedge clk); w_clear = 1; @(negedge clk); w_clear = 0;
    for (int j = 0; j < NC; j++)
      for (int m = 0; m < M; m++) begin
        w[j][m] = $urandom_range(0, 419) - 210;
        w_valid = 1; w_scan = 1; w_value = 12'(w[j][m]);
        @(negedge clk);
      end
    w_valid = 0; w_scan = 0;
    mn = 0;
    for (int j = 0; j < NC; j++) for (int m = 0; m < M; m++) if (w[j][m] < mn) mn = w[j][m];
    @(negedge clk);
    check(int'(w_min) == mn);
    for (int j = 0; j < NC; j++)
      for (int m = 0; m < M; m++) write_weight(j, m);
    // Rewrite a few cells to new values so that pre-tune also has to erase.
    for (int k = 0; k < 8; k++) begin
      int j, m;
      j = $urandom_range(0, NC-1); m = $urandom_range(0, M-1);
      w[j][m] = (k % 2) ? 200 : 209;
      write_weight(j, m);
    end
    read_class_cells();

    // (3) inferences
    for (int t = 0; t < 40; t++) begin
      logic [NL-1:0] lit;
      logic [NC-1:0] cexp;
      longint esum [M];
      longint sw [M];
      longint unsigned cur;
      int lat, ecls, scls;
      features = (t == 0) ? '1 : F'({$urandom, $urandom});
      lit = {~features, features};
      for (int j = 0; j < NC; j++) begin
        cexp[j] = 1'b1;
        for (int i = 0; i < NL; i++) if (ta[i][j] && !lit[i]) cexp[j] = 1'b0;
      end
      for (int m = 0; m < M; m++) begin
        esum[m] = 0; sw[m] = 0;
        for (int jt = 0; jt < J; jt++) begin
          cur = 0;
          for (int r = 0; r < N; r++) if (cexp[jt*N + r]) cur += 2 * g[jt][r][m];
          esum[m] += longint'(cur / LSB);
          if (jt == 1 && cur != 0) n_tile1++;
        end
        for (int j = 0; j < NC; j++) if (cexp[j]) sw[m] += w[j][m];
      end
      ecls = 0; scls = 0;
      for (int m = 1; m < M; m++) begin
        if (esum[m] > esum[ecls]) ecls = m;
        if (sw[m] > sw[scls]) scls = m;
      end
      @(negedge clk);
      check(in_ready);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      lat = 0;  // clocks after the accepting edge
      while (!out_valid && lat < 500) begin @(negedge clk); lat++; end
      check(lat == 4 * 11 + 2);
      check(out_clauses == cexp);
      for (int m = 0; m < M; m++) check(longint'(out_sums[m]) == esum[m]);
      check(int'(out_class) == ecls);
      if (int'(out_class) == scls) n_agree++;
      n_inf++;
      for (int j = 0; j < NC; j++) begin
        if (cexp[j]) n_c1++; else n_c0++;
        // AND across literal tiles: the two partial clauses disagree
        if (dut.partial[j / N][0][j % N] != dut.partial[j / N][1][j % N]) n_and++;
      end
    end
    check(n_agree * 4 >= n_inf * 3);
    $display("mechanisms: include=%0d exclude=%0d pre_prog=%0d pre_erase=%0d fine=%0d miss=%0d clause0=%0d clause1=%0d and_split=%0d tile1=%0d sw_agree=%0d/%0d",
             n_inc, n_exc, n_pre_prog, n_pre_erase, n_fine, n_miss, n_c0, n_c1, n_and, n_tile1, n_agree, n_inf);
    check(n_inc > 0); check(n_exc > 0); check(n_pre_prog > 0); check(n_pre_erase > 0);
    check(n_fine > 0); check(n_miss > 0); check(n_c0 > 0); check(n_c1 > 0); check(n_and > 0); check(n_tile1 > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
