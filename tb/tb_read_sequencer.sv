// tb_read_sequencer: one reading cycle at a 500 ps clock must be a 5 ns (10 clock) pulse,
// SE from 2 ns for 2.5 ns (clocks 4..8), Dis in the last 500 ps (clock 9), sample on
// clock 8 and done right after. Two back-to-back cycles are run; a start while busy
// must be ignored.
module tb_read_sequencer;
  logic clk = 0, rst_n = 0, start = 0;
  logic rp, se, dis, sample, done, busy;
  int checks = 0, failures = 0;
  int k;
  always #250ps clk = ~clk;

  read_sequencer dut (.clk(clk), .rst_n(rst_n), .start(start), .read_pulse(rp), .se(se),
                      .dis(dis), .sample(sample), .done(done), .busy(busy));

  task automatic check(bit cond);
    checks++;
    if (!cond) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int run = 0; run < 2; run++) begin
      start <= 1;
      @(posedge clk);
      start <= (run == 0);  // keep start high in run 0: must not restart while busy
      for (k = 0; k < 10; k++) begin
        @(negedge clk);
        check(rp == 1'b1);
        check(se == (k >= 4 && k <= 8));
        check(dis == (k == 9));
        check(sample == (k == 8));
        check(done == 1'b0);
      end
      start <= 0;
      @(negedge clk);
      check(rp == 1'b0 && se == 1'b0 && dis == 1'b0);
      check(done == 1'b1);
      @(negedge clk);
      check(done == 1'b0 && busy == 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (500) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
