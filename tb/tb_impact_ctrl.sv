// tb_impact_ctrl: three clause-column groups and two class-column groups. An inference
// must read clause groups 0,1,2 then class groups 0,1 (one sample strobe each, in that
// order, clause and class pulses never together) and give sums_valid exactly
// (3 + 2) * 11 + 1 clocks after the clock edge that takes start.
module tb_impact_ctrl;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, cl_rp, cl_se, cl_dis, cl_sample, cs_rp, cs_sample, sums_valid;
  logic [1:0] cl_grp;
  logic cs_grp;
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  impact_ctrl #(.CL_GROUPS(3), .CS_GROUPS(2)) dut (.clk(clk), .rst_n(rst_n), .start(start), .busy(busy),
    .cl_read_pulse(cl_rp), .cl_se(cl_se), .cl_dis(cl_dis), .cl_sample(cl_sample), .cl_grp(cl_grp),
    .cs_read_pulse(cs_rp), .cs_sample(cs_sample), .cs_grp(cs_grp), .sums_valid(sums_valid));

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int run = 0; run < 3; run++) begin
      int cyc, ncl, ncs, lat;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 0; ncl = 0; ncs = 0; lat = -1;
      while (lat < 0 && cyc < 200) begin
        checks++; if (cl_rp && cs_rp) failures++;
        if (cl_sample) begin
          checks += 2;
          if (int'(cl_grp) != ncl) failures++;
          if (ncs != 0) failures++;
          ncl++;
        end
        if (cs_sample) begin
          checks++; if (int'(cs_grp) != ncs) failures++;
          ncs++;
        end
        if (sums_valid) lat = cyc;
        @(negedge clk); cyc++;
      end
      checks += 4;
      if (ncl != 3) failures++;
      if (ncs != 2) failures++;
      if (lat != 5 * 11 + 1) failures++;
      if (busy) failures++;
      $display("ctrl: latency %0d clocks", lat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
