// tb_row_mux: checks both row-MUX polarities against the drive rule worked out here:
// clause tile drives V_R for literal 0, class tile for clause 1, nothing without a pulse.
module tb_row_mux;
  localparam int R = 37;
  logic [R-1:0] sel, vr_lit, vr_cls;
  logic rp;
  int checks = 0, failures = 0;

  row_mux #(.ROWS(R), .VR_WHEN_ONE(1'b0)) u_lit (.sel(sel), .read_pulse(rp), .row_vr(vr_lit));
  row_mux #(.ROWS(R), .VR_WHEN_ONE(1'b1)) u_cls (.sel(sel), .read_pulse(rp), .row_vr(vr_cls));

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < R; i++) sel[i] = $urandom_range(0, 1);
      rp = (t % 3) != 0;
      #1;
      for (int i = 0; i < R; i++) begin
        checks += 2;
        if (vr_lit[i] !== (rp && sel[i] == 1'b0)) failures++;
        if (vr_cls[i] !== (rp && sel[i] == 1'b1)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
