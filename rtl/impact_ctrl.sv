// impact_ctrl: sequences one inference through the two crossbar levels.
//
// An inference is: one reading cycle per clause-column group on the clause tiles (the
// CSAs resolve and the clause registers load on the sample strobe), then one reading
// cycle per class-column group on the class tiles with the fresh clauses on their rows
// (the ADCs sample), then one clock in which the digitised class sums are handed to the
// arg-max (sums_valid). Clause computation strictly before class computation follows the
// published hierarchy; the group loop and the hand-offs are this design's choices.
//
// Interface: `start` is taken when idle; `busy` is high until sums_valid has been given.
// The cl_* outputs go to the clause tiles, the cs_* outputs to the class tiles.
// Timing: one reading cycle is READ_CYCLES + 1 clocks (start to done); an inference
// takes (CL_GROUPS + CS_GROUPS) * (READ_CYCLES + 1) + 1 clocks from start to sums_valid.
module impact_ctrl #(
  parameter int unsigned CL_GROUPS   = 1,
  parameter int unsigned CS_GROUPS   = 1,
  parameter int unsigned CL_GW       = (CL_GROUPS > 1) ? $clog2(CL_GROUPS) : 1,
  parameter int unsigned CS_GW       = (CS_GROUPS > 1) ? $clog2(CS_GROUPS) : 1,
  parameter int unsigned READ_CYCLES = 10,
  parameter int unsigned SE_DELAY    = 4,
  parameter int unsigned SE_CYCLES   = 5,
  parameter int unsigned DIS_CYCLES  = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             cl_read_pulse,
  output logic             cl_se,
  output logic             cl_dis,
  output logic             cl_sample,
  output logic [CL_GW-1:0] cl_grp,
  output logic             cs_read_pulse,
  output logic             cs_sample,
  output logic [CS_GW-1:0] cs_grp,
  output logic             sums_valid
);
  typedef enum logic [1:0] { S_IDLE, S_CLAUSE, S_CLASS, S_SUM } state_t;
  state_t st;
  logic seq_start, rp, se, dis, sample, seq_done, seq_busy;

  read_sequencer #(.READ_CYCLES(READ_CYCLES), .SE_DELAY(SE_DELAY), .SE_CYCLES(SE_CYCLES),
                   .DIS_CYCLES(DIS_CYCLES)) u_seq (
    .clk(clk), .rst_n(rst_n), .start(seq_start), .read_pulse(rp), .se(se), .dis(dis),
    .sample(sample), .done(seq_done), .busy(seq_busy));

  always_comb begin
    seq_start = 1'b0;
    unique case (st)
      S_IDLE:   seq_start = start;
      S_CLAUSE: seq_start = seq_done;  // next clause group, or first class group
      S_CLASS:  seq_start = seq_done && (cs_grp != CS_GW'(CS_GROUPS - 1));
      default:  seq_start = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cl_grp <= '0; cs_grp <= '0; sums_valid <= 1'b0;
    end else begin
      sums_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_CLAUSE; cl_grp <= '0; cs_grp <= '0;
        end
        S_CLAUSE: if (seq_done) begin
          if (cl_grp == CL_GW'(CL_GROUPS - 1)) st <= S_CLASS;
          else cl_grp <= cl_grp + 1'b1;
        end
        S_CLASS: if (seq_done) begin
          if (cs_grp == CS_GW'(CS_GROUPS - 1)) st <= S_SUM;
          else cs_grp <= cs_grp + 1'b1;
        end
        S_SUM: begin
          sums_valid <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy          = (st != S_IDLE);
  assign cl_read_pulse = (st == S_CLAUSE) && rp;
  assign cl_se         = (st == S_CLAUSE) && se;
  assign cl_dis        = (st == S_CLAUSE) && dis;
  assign cl_sample     = (st == S_CLAUSE) && sample;
  assign cs_read_pulse = (st == S_CLASS) && rp;
  assign cs_sample     = (st == S_CLASS) && sample;

  // The sequencer must never be asked to start while a cycle is running.
  assert property (@(posedge clk) disable iff (!rst_n) seq_start |-> !seq_busy);
endmodule
