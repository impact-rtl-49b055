// tb_ta_programmer: random TA states (1..256) are written into an 8 x 8 array.
// States above 128 must end as include (cell above 2.4 uS, no pulse from the erased
// state); the rest as exclude (below 1 nS after exactly six 1 ms program pulses, the
// count worked out here from the cell law G -> G/4). Cells that were programmed earlier
// and are rewritten as include must be erased back up, with erase pulses counted.
module tb_ta_programmer;
  import impact_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [AW-1:0] in_row, in_col, vr, vc;
  logic [8:0] in_state;
  pulse_cmd_t pulse;
  current_t vcur, col_i [8];
  logic busy, done, d_inc, d_fail;
  logic [7:0] d_pulses;
  int checks = 0, failures = 0, n_inc = 0, n_exc = 0, n_reinc = 0;
  always #250ps clk = ~clk;

  ta_programmer dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_row(in_row),
    .in_col(in_col), .in_state(in_state), .pulse(pulse), .vfy_row(vr), .vfy_col(vc), .vfy_current(vcur),
    .busy(busy), .done(done), .done_include(d_inc), .done_pulses(d_pulses), .done_fail(d_fail));
  yflash_crossbar #(.ROWS(8), .COLS(8)) u_x (.clk(clk), .rst_n(rst_n), .pulse(pulse), .row_vr('0),
    .col_en('0), .col_current(col_i), .vfy_row(vr), .vfy_col(vc), .vfy_current(vcur));

  function automatic int pulses_to_lcs(longint unsigned g);
    int n = 0;
    while (g >= 1000) begin g = g - g/2 - g/4; n++; end
    return n;
  endfunction

  initial begin
    bit written [8][8];
    in_row = '0; in_col = '0; in_state = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 120; t++) begin
      int r, c, s; bit exp_inc, was_prog;
      r = $urandom_range(0, 7); c = $urandom_range(0, 7);
      s = (t == 0) ? 128 : (t == 1) ? 129 : (t == 2) ? 1 : (t == 3) ? 256 : $urandom_range(1, 256);
      exp_inc = (s > 128);
      was_prog = written[r][c];
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_row = AW'(r); in_col = AW'(c); in_state = 9'(s);
      @(negedge clk); in_valid = 0;
      while (!done) @(negedge clk);
      vr = AW'(r); vc = AW'(c);
      #1;
      checks += 3;
      if (d_inc !== exp_inc || d_fail) failures++;
      if (exp_inc) begin
        if (longint'(vcur) <= 4_800_000) failures++;
        if (!was_prog && d_pulses != 0) failures++;
        if (was_prog) n_reinc++;
        n_inc++;
        written[r][c] = 0;
      end else begin
        if (longint'(vcur) >= 2_000) failures++;
        if (!was_prog && d_pulses != 8'(pulses_to_lcs(2_500_000))) failures++;
        if (was_prog && d_pulses != 0) failures++;
        n_exc++;
        written[r][c] = 1;
      end
    end
    checks++; if (n_inc == 0 || n_exc == 0 || n_reinc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
