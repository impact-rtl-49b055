// tb_partial_clause_and: three partial clause vectors are ANDed per clause.
module tb_partial_clause_and;
  logic [15:0] p [3];
  logic [15:0] c;
  int checks = 0, failures = 0;
  partial_clause_and #(.X(3), .N(16)) dut (.partial(p), .clauses(c));
  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int x = 0; x < 3; x++) p[x] = 16'($urandom) | 16'($urandom);  // mostly ones
      #1;
      for (int n = 0; n < 16; n++) begin
        checks++;
        if (c[n] !== (p[0][n] && p[1][n] && p[2][n])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
