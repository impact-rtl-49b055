// tb_csa: clause currents either side of the 4.1 uA decision point (the include-hit
// case of about 5 uA, the worst-case leakage of about 3.1 uA, exact boundary values)
// are sensed with an SE pulse and a Dis pulse; outputs are checked per clock.
module tb_csa;
  import impact_pkg::*;
  logic clk = 0, rst_n = 0, se = 0, dis = 0;
  current_t ic;
  logic c, c_n;
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  csa dut (.clk(clk), .rst_n(rst_n), .ic(ic), .se(se), .dis(dis), .c(c), .c_n(c_n));

  task automatic sense(longint unsigned i_pa);
    bit exp_c;
    exp_c = (i_pa < 64'd4_100_000);
    ic <= current_t'(i_pa);
    @(posedge clk); se <= 1;
    @(posedge clk);
    // Input moves after the decision: the latch must hold.
    ic <= current_t'(exp_c ? 64'd9_000_000 : 64'd0);
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      checks++;
      if (c !== exp_c || c_n !== !exp_c) failures++;
    end
    @(posedge clk); se <= 0; dis <= 1;
    @(negedge clk);
    checks++;
    if (c !== 1'b0 || c_n !== 1'b0) failures++;
    @(posedge clk); dis <= 0;
  endtask

  initial begin
    ic = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    checks++; if (c !== 0 || c_n !== 0) failures++;
    sense(64'd8_800_000);   // include hit
    sense(64'd3_130_000);   // worst-case leakage
    sense(64'd4_100_000);   // exactly at the decision point -> clause 0
    sense(64'd4_099_999);
    sense(64'd0);
    for (int t = 0; t < 40; t++) sense(longint'($urandom_range(0, 10_000_000)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
