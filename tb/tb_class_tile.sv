// tb_class_tile: an 8-clause x 4-class tile. Cells get random program/erase pulses so
// each holds a different conductance, tracked here with the same pulse law as the cell
// model. For random clause vectors a reading cycle must leave each ADC code equal to
// floor(sum over clauses=1 of G * 2 V / LSB).
module tb_class_tile;
  import impact_pkg::*;
  localparam int N = 8, M = 4;
  localparam longint LSB = 2385;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] cl;
  logic start, rp, se, dis, sample, done, busy;
  pulse_cmd_t pulse;
  current_t vcur;
  logic [19:0] codes [M];
  longint unsigned gm [N][M];
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  read_sequencer u_seq (.clk(clk), .rst_n(rst_n), .start(start), .read_pulse(rp), .se(se), .dis(dis),
                        .sample(sample), .done(done), .busy(busy));
  class_tile #(.N(N), .M(M)) dut (.clk(clk), .rst_n(rst_n), .clauses(cl), .read_pulse(rp),
    .sample(sample), .grp(1'b0), .pulse(pulse), .vfy_row('0), .vfy_col('0), .vfy_current(vcur),
    .codes(codes));

  initial begin
    start = 0; pulse = PULSE_IDLE; cl = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int r = 0; r < N; r++) for (int m = 0; m < M; m++) begin
      int np;
      gm[r][m] = 2_500_000;
      np = $urandom_range(0, 6);
      for (int p = 0; p < np; p++) begin
        pulse.valid <= 1; pulse.op <= OP_PROGRAM; pulse.width <= PW_500US;
        pulse.row <= AW'(r); pulse.col <= AW'(m);
        @(posedge clk);
        gm[r][m] = gm[r][m] - gm[r][m] / 2;
      end
    end
    pulse.valid <= 0;
    for (int t = 0; t < 50; t++) begin
      cl = (t == 0) ? '0 : (t == 1) ? '1 : N'($urandom);
      start <= 1; @(posedge clk); start <= 0;
      do @(posedge clk); while (!done);
      @(negedge clk);
      for (int m = 0; m < M; m++) begin
        longint unsigned s;
        s = 0;
        for (int r = 0; r < N; r++) if (cl[r]) s += 2 * gm[r][m];
        checks++; if (longint'(codes[m]) != s / LSB) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
