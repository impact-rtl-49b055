// tb_weight_tuner: random unipolar weights (0..419, including the extremes) are written
// into a 4 x 4 array, many cells several times. After each write the cell is read back:
// if no miss is reported its conductance must lie within +-5 segments of
// G(w) = 1 nS + w * (2.5 uS - 1 nS) / 419, and outside it if a miss is reported.
// Pre-tune may use at most 10 pulses and fine-tune at most 6, and the pulses seen on the
// array must be 500 us wide during pre-tune and 50 us wide during fine-tune. Both stages, both pulse
// directions and at least one miss must occur.
module tb_weight_tuner;
  import impact_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [AW-1:0] in_row, in_col, vr, vc, tr = '0, tc = '0;
  logic [8:0] in_w;
  pulse_cmd_t pulse;
  current_t vcur, tcur, col_i [4];
  logic busy, done, miss;
  logic [4:0] pp, pe, pf;
  int checks = 0, failures = 0;
  int n_miss = 0, n_hit = 0, n_pre_prog = 0, n_pre_erase = 0, n_fine = 0;
  always #250ps clk = ~clk;

  weight_tuner dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_row(in_row),
    .in_col(in_col), .in_w(in_w), .pulse(pulse), .vfy_row(vr), .vfy_col(vc), .vfy_current(vcur),
    .busy(busy), .done(done), .done_miss(miss), .done_pre_prog(pp), .done_pre_erase(pe), .done_fine(pf));
  yflash_crossbar #(.ROWS(4), .COLS(4)) u_x (.clk(clk), .rst_n(rst_n), .pulse(pulse), .row_vr('0),
    .col_en('0), .col_current(col_i), .vfy_row(busy ? vr : tr), .vfy_col(busy ? vc : tc), .vfy_current(vcur));
  assign tcur = vcur;

  // pulses seen on the array during the current write, by width
  int n500 = 0, n50 = 0, nother = 0;
  always @(posedge clk)
    if (pulse.valid) begin
      if (pulse.width == PW_500US) n500++;
      else if (pulse.width == PW_50US) n50++;
      else nother++;
    end

  function automatic longint seg_i(longint k);
    return 2 * (1000 + k * 5964);
  endfunction

  initial begin
    in_row = '0; in_col = '0; in_w = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 200; t++) begin
      int r, c, w; longint lo, hi; bit in_win;
      r = $urandom_range(0, 3); c = $urandom_range(0, 3);
      w = (t == 0) ? 0 : (t == 1) ? 419 : $urandom_range(0, 419);
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      n500 = 0; n50 = 0; nother = 0;
      in_valid = 1; in_row = AW'(r); in_col = AW'(c); in_w = 9'(w);
      @(negedge clk); in_valid = 0;
      while (!done) @(negedge clk);
      tr = AW'(r); tc = AW'(c);
      #1;
      lo = (w - 5 <= 0) ? 0 : seg_i(w - 5);
      hi = seg_i(w + 5);
      in_win = (longint'(tcur) >= lo) && (longint'(tcur) <= hi);
      checks += 4;
      // pre-tune uses 500 us pulses, fine-tune 50 us pulses
      if (n500 != int'(pp) + int'(pe) || n50 != int'(pf) || nother != 0) failures++;
      if (in_win == miss) failures++;
      if (int'(pp) + int'(pe) > 10) failures++;
      if (int'(pf) > 6) failures++;
      if (miss) n_miss++; else n_hit++;
      n_pre_prog += int'(pp); n_pre_erase += int'(pe); n_fine += int'(pf);
    end
    checks++; if (n_miss == 0 || n_hit == 0 || n_pre_prog == 0 || n_pre_erase == 0 || n_fine == 0) failures++;
    $display("tuner: hits=%0d misses=%0d pre_prog=%0d pre_erase=%0d fine=%0d", n_hit, n_miss, n_pre_prog, n_pre_erase, n_fine);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
