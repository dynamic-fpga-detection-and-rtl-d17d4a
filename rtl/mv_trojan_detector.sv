// mv_trojan_detector: the dynamic Trojan detector of the multiple-variant (MV)
// scheme.
//
// The N running implementations of the same IP (from different vendors) get
// the same input. The detector compares their outputs word by word: the
// majority word is the safe output, so a single infected variant never reaches
// the system output. Each variant that disagrees with the majority has its
// error counter incremented; a first discrepancy raises a warning and a count
// above the threshold raises the Trojan alarm for that variant, which the
// alarm handling unit (pr_controller) uses to swap the core out.
// This follows the paper's MV description and its Algorithm 2 loop body.
//
// Interface: 'in_valid' qualifies a beat of outputs; 'part' marks slots that
// hold a running core; 'clear' resets a slot's counter.
// Timing: safe_out/safe_valid/mismatch are registered, one cycle after the
// beat. err is combinational for the beat; err_count, warning and
// trojan_alarm change on the edge after it.
module mv_trojan_detector #(
  parameter int unsigned N        = 3,
  parameter int unsigned W        = 8,
  parameter int unsigned CNT_W    = 8,
  parameter int unsigned WARN_TH  = 1,
  parameter int unsigned ALARM_TH = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [N-1:0]            part,
  input  logic [N-1:0][W-1:0]     ip_out,
  input  logic [N-1:0]            clear,
  output logic [W-1:0]            safe_out,
  output logic                    safe_valid,
  output logic                    mismatch,
  output logic [N-1:0]            agree,
  output logic [N-1:0]            err,
  output logic [N-1:0][CNT_W-1:0] err_count,
  output logic [N-1:0]            warning,
  output logic [N-1:0]            trojan_alarm
);

  logic [W-1:0] maj;
  logic         maj_found;
  logic         mism;

  majority_vote #(.N(N), .W(W)) u_majority (
    .din      (ip_out),
    .part     (part),
    .maj      (maj),
    .maj_found(maj_found),
    .agree    (agree),
    .mismatch (mism)
  );

  assign err = (maj_found && in_valid) ? (part & ~agree) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      safe_out   <= '0;
      safe_valid <= 1'b0;
      mismatch   <= 1'b0;
    end else begin
      safe_valid <= in_valid && maj_found;
      mismatch   <= in_valid && mism;
      if (in_valid && maj_found) safe_out <= maj;
    end
  end

  error_tracker #(.N(N), .CNT_W(CNT_W), .WARN_TH(WARN_TH), .ALARM_TH(ALARM_TH)) u_alarm (
    .clk      (clk),
    .rst_n    (rst_n),
    .check    (in_valid),
    .err      (err),
    .clear    (clear),
    .err_count(err_count),
    .warning  (warning),
    .alarm    (trojan_alarm)
  );

endmodule
