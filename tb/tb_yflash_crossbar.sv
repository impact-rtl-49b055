// tb_yflash_crossbar: an 8 x 4 array. After reset every cell is erased (2.5 uS). Random
// program/erase pulses of all widths are applied while the bench keeps its own copy of
// the expected conductances (program keeps 1/4, 1/2 or 7/8 of G; erase closes 3/4, 1/2
// or 1/8 of the gap to 2.6 uS). The verify port and the column currents for random row
// drives and column enables (sum of G * 2 V over driven rows) are checked against it.
module tb_yflash_crossbar;
  import impact_pkg::*;
  localparam int R = 8, C = 4;
  logic clk = 0, rst_n = 0;
  pulse_cmd_t pulse;
  logic [R-1:0] row_vr;
  logic [C-1:0] col_en;
  current_t col_current [C];
  logic [AW-1:0] vr, vc;
  current_t vcur;
  longint unsigned gm [R][C];
  int checks = 0, failures = 0;
  always #250ps clk = ~clk;

  yflash_crossbar #(.ROWS(R), .COLS(C)) dut (.clk(clk), .rst_n(rst_n), .pulse(pulse), .row_vr(row_vr),
    .col_en(col_en), .col_current(col_current), .vfy_row(vr), .vfy_col(vc), .vfy_current(vcur));

  function automatic longint unsigned model(longint unsigned g, bit erase, int w);
    longint unsigned d, n;
    if (!erase) begin
      n = (w == 0) ? g - g/2 - g/4 : (w == 1) ? g - g/2 : g - g/8;
      if (n < 100) n = 100;
    end else begin
      d = (g < 2_600_000) ? 2_600_000 - g : 0;
      n = (w == 0) ? g + d - d/4 : (w == 1) ? g + d/2 : g + d/8;
    end
    return n;
  endfunction

  initial begin
    pulse = PULSE_IDLE; row_vr = '0; col_en = '0; vr = '0; vc = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) gm[r][c] = 2_500_000;
    for (int t = 0; t < 400; t++) begin
      if (t % 4 != 3) begin
        int r, c, w; bit e;
        r = $urandom_range(0, R-1); c = $urandom_range(0, C-1);
        w = $urandom_range(0, 2); e = (t % 5 == 0);
        pulse.valid <= 1; pulse.op <= e ? OP_ERASE : OP_PROGRAM;
        pulse.width <= pulse_width_t'(w); pulse.row <= AW'(r); pulse.col <= AW'(c);
        @(posedge clk);
        pulse.valid <= 0;
        gm[r][c] = model(gm[r][c], e, w);
        vr = AW'(r); vc = AW'(c);
        @(negedge clk);
        checks++; if (longint'(vcur) != 2 * gm[r][c]) failures++;
      end else begin
        longint unsigned e [C];
        logic [R-1:0] rv; logic [C-1:0] ce;
        rv = R'($urandom); ce = C'($urandom);
        row_vr <= rv; col_en <= ce;
        @(posedge clk);
        @(negedge clk);
        for (int c = 0; c < C; c++) begin
          e[c] = 0;
          if (ce[c]) for (int r = 0; r < R; r++) if (rv[r]) e[c] += 2 * gm[r][c];
          checks++; if (longint'(col_current[c]) != e[c]) failures++;
        end
        row_vr <= '0;
        @(posedge clk); @(negedge clk);
        for (int c = 0; c < C; c++) begin checks++; if (col_current[c] != 0) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
