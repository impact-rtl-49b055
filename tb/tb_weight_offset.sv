// tb_weight_offset: a scan over random signed weights must find the most negative one,
// and each weight must then come out shifted by its magnitude (never negative).
module tb_weight_offset;
  logic clk = 0, rst_n = 0, clear = 0, scan_valid = 0;
  logic signed [11:0] scan_w, w_in, wmin;
  logic [11:0] w_out;
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  weight_offset #(.WB(12)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .scan_valid(scan_valid),
                                .scan_w(scan_w), .w_in(w_in), .w_out(w_out), .wmin(wmin));
  initial begin
    int ws [64];
    int mn;
    scan_w = '0; w_in = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int model = 0; model < 5; model++) begin
      clear <= 1; @(posedge clk); clear <= 0;
      mn = 0;
      for (int i = 0; i < 64; i++) begin
        ws[i] = (model == 4) ? $urandom_range(0, 300) : $urandom_range(0, 419) - 210;
        if (ws[i] < mn) mn = ws[i];
        scan_w <= 12'(ws[i]); scan_valid <= 1;
        @(posedge clk);
      end
      scan_valid <= 0;
      @(negedge clk);
      checks++; if (int'(wmin) != mn) failures++;
      for (int i = 0; i < 64; i++) begin
        w_in = 12'(ws[i]);
        #1;
        checks++; if (int'(w_out) != ws[i] - mn) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
