// tb_column_decoder: 10 columns in groups of 3 (4 groups); every group index and the
// disabled case are compared with the expected connect mask.
module tb_column_decoder;
  logic en;
  logic [1:0] grp;
  logic [9:0] col_en, col_all;
  int checks = 0, failures = 0;

  column_decoder #(.COLS(10), .GROUP(3)) dut (.en(en), .grp(grp), .col_en(col_en));
  column_decoder #(.COLS(10))            dall (.en(en), .grp(1'b0), .col_en(col_all));

  initial begin
    for (int e = 0; e < 2; e++)
      for (int g = 0; g < 4; g++) begin
        en = e[0]; grp = 2'(g);
        #1;
        for (int c = 0; c < 10; c++) begin
          checks += 2;
          if (col_en[c] !== (e == 1 && c >= 3*g && c < 3*g+3)) failures++;
          if (col_all[c] !== (e == 1)) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
