// ca_reporter: the per-period report to the core certificate authority
// (Algorithm 2, line 14).
//
// It keeps a warning score for every core the system owns, not only the ones
// running: each error the detector charges to a slot ('err', one bit per
// slot) is added to the score of the core in that slot ('slot_core'). Every
// PERIOD_T cycles it presents all scores and a class for each core, valid for
// one cycle ('report_valid'), and starts the next period from zero. The
// classes are the paper's: safe when the score is zero, buggy when it is below
// the threshold, infected otherwise. Scores saturate.
// Keeping the scores per core and clearing them after each report are this
// design's choices; the server and its database are outside the design.
module ca_reporter #(
  parameter int unsigned N_SLOTS   = 3,
  parameter int unsigned N_CORES   = 8,
  parameter int unsigned SCORE_W   = 8,
  parameter int unsigned INFECT_TH = 4,
  parameter int unsigned PERIOD_T  = 16384,
  localparam int unsigned CID_W    = (N_CORES > 1) ? $clog2(N_CORES) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N_SLOTS-1:0]                err,
  input  logic [N_SLOTS-1:0][CID_W-1:0]     slot_core,
  output logic                              report_valid,
  output logic [N_CORES-1:0][SCORE_W-1:0]   report_score,
  output trojan_pkg::core_class_e [N_CORES-1:0] report_class
);
  import trojan_pkg::*;

  localparam int unsigned    PER_W     = (PERIOD_T > 1) ? $clog2(PERIOD_T) : 1;
  localparam logic [SCORE_W-1:0] S_MAX = '1;

  logic [N_CORES-1:0][SCORE_W-1:0] score;
  logic [PER_W-1:0]                per_cnt;
  logic                            period_end;
  logic [N_CORES-1:0][SCORE_W-1:0] score_next;

  assign period_end = (32'(per_cnt) == PERIOD_T - 1);

  always_comb begin
    score_next = score;
    for (int s = 0; s < int'(N_SLOTS); s++) begin
      if (err[s] && score_next[slot_core[s]] != S_MAX)
        score_next[slot_core[s]] = score_next[slot_core[s]] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      score        <= '0;
      per_cnt      <= '0;
      report_valid <= 1'b0;
      report_score <= '0;
      for (int c = 0; c < int'(N_CORES); c++) report_class[c] <= CLS_SAFE;
    end else begin
      report_valid <= period_end;
      if (period_end) begin
        per_cnt      <= '0;
        report_score <= score_next;
        for (int c = 0; c < int'(N_CORES); c++) begin
          if (score_next[c] == '0)                     report_class[c] <= CLS_SAFE;
          else if (32'(score_next[c]) < INFECT_TH)     report_class[c] <= CLS_BUGGY;
          else                                         report_class[c] <= CLS_INFECTED;
        end
        score <= '0;
      end else begin
        per_cnt <= per_cnt + 1'b1;
        score   <= score_next;
      end
    end
  end

endmodule
