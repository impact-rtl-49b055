// tb_partial_class_sum: four tiles' codes per class are added without overflow.
module tb_partial_class_sum;
  logic [7:0] p [4][3];
  logic [9:0] s [3];
  int checks = 0, failures = 0;
  partial_class_sum #(.J(4), .M(3), .BITS(8)) dut (.partial(p), .sums(s));
  initial begin
    for (int t = 0; t < 300; t++) begin
      int e [3];
      for (int m = 0; m < 3; m++) begin
        e[m] = 0;
        for (int j = 0; j < 4; j++) begin
          p[j][m] = (t < 3) ? 8'hff : 8'($urandom);
          e[m] += int'(p[j][m]);
        end
      end
      #1;
      for (int m = 0; m < 3; m++) begin
        checks++;
        if (int'(s[m]) != e[m]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
