// tb_adc: codes must equal floor(I / LSB), saturate at full scale, and hold between samples.
module tb_adc;
  import impact_pkg::*;
  logic clk = 0, rst_n = 0, sample = 0;
  current_t i_in;
  logic [7:0] code;
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  adc #(.BITS(8), .LSB_PA(1000)) dut (.clk(clk), .rst_n(rst_n), .sample(sample), .i_in(i_in), .code(code));

  initial begin
    longint unsigned i, e;
    logic [7:0] held;
    i_in = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 300; t++) begin
      i = (t < 5) ? longint'(t * 999) : longint'($urandom_range(0, 300_000));
      e = i / 1000;
      if (e > 255) e = 255;
      i_in <= current_t'(i); sample <= 1;
      @(posedge clk); sample <= 0;
      @(negedge clk);
      checks++; if (code !== 8'(e)) failures++;
      held = code;
      i_in <= current_t'($urandom_range(0, 300_000));
      @(posedge clk); @(negedge clk);
      checks++; if (code !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
