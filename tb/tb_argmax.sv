// tb_argmax: random class sums (with forced ties) must give the index of the largest sum,
// lowest index on a tie, one clock after valid.
module tb_argmax;
  logic clk = 0, rst_n = 0, valid = 0;
  logic [11:0] sums [10];
  logic out_valid;
  logic [3:0] cls;
  logic [11:0] mx;
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  argmax #(.M(10), .W(12)) dut (.clk(clk), .rst_n(rst_n), .valid(valid), .sums(sums),
                                .out_valid(out_valid), .cls(cls), .max_sum(mx));
  initial begin
    int bi, bv;
    for (int m = 0; m < 10; m++) sums[m] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 400; t++) begin
      for (int m = 0; m < 10; m++) sums[m] = 12'($urandom_range(0, (t % 2) ? 4095 : 7));
      bi = 0; bv = int'(sums[0]);
      for (int m = 1; m < 10; m++) if (int'(sums[m]) > bv) begin bi = m; bv = int'(sums[m]); end
      valid <= 1;
      @(posedge clk); valid <= 0;
      @(negedge clk);
      checks += 3;
      if (!out_valid) failures++;
      if (int'(cls) != bi) failures++;
      if (int'(mx) != bv) failures++;
      @(negedge clk);
      checks++; if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
