// read_sequencer: timing of one crossbar reading cycle.
//
// A reading cycle is a 5 ns V_R pulse on the driven rows. The column currents need 2 ns
// to settle, then the sense enable (SE) is raised for 2.5 ns, and in the last 500 ps of
// the pulse the discharge (Dis) resets the CSA for the next cycle. With a 500 ps clock
// (this design's choice, so that every published time is a whole number of cycles) that
// is READ_CYCLES = 10, SE_DELAY = 4, SE_CYCLES = 5, DIS_CYCLES = 1. `sample` marks the
// last SE clock, when the CSA outputs are valid and are captured downstream.
//
// Interface: pulse `start` while idle; read_pulse/se/dis follow from the next clock on;
// `done` is high for one clock after the last pulse cycle. A start while busy is ignored.
// The published Dis waveform annotation reads 2 ns while the text gives the last 500 ps;
// the text is followed here, and DIS_CYCLES can be changed.
module read_sequencer #(
  parameter int unsigned READ_CYCLES = 10,
  parameter int unsigned SE_DELAY    = 4,
  parameter int unsigned SE_CYCLES   = 5,
  parameter int unsigned DIS_CYCLES  = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic read_pulse,
  output logic se,
  output logic dis,
  output logic sample,
  output logic done,
  output logic busy
);
  localparam int unsigned CW = $clog2(READ_CYCLES + 1);
  logic [CW-1:0] cnt;  // cycle index inside the pulse

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          cnt  <= '0;
        end
      end else if (cnt == CW'(READ_CYCLES - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  always_comb begin
    read_pulse = busy;
    se     = busy && (cnt >= CW'(SE_DELAY)) && (cnt < CW'(SE_DELAY + SE_CYCLES));
    dis    = busy && (cnt >= CW'(READ_CYCLES - DIS_CYCLES));
    sample = busy && (cnt == CW'(SE_DELAY + SE_CYCLES - 1));
  end

  initial begin
    assert (SE_DELAY + SE_CYCLES + DIS_CYCLES <= READ_CYCLES)
      else $error("read_sequencer: SE and Dis do not fit in the reading pulse");
  end
endmodule
