// crc_voting_circuit: CRC voting for the MCRC scheme.
//
// The outputs of the N running IPs are reduced to short CRCs, and this circuit
// votes among the CRCs instead of the full outputs, which saves comparators.
// A majority circuit picks the right CRC (the CRC of the non-infected data);
// each IP whose CRC differs from it has its error counter incremented; the
// alarm circuit raises a warning on a first discrepancy and the Trojan alarm
// when a counter exceeds the threshold. This is the structure of the paper's
// CRC voting figure (majority circuit, error count per IP, alarm circuit).
// 'agree' is also given out so that the CRC results can update the selection
// weights.
//
// Interface: 'check' qualifies a beat in which all running IPs produced a word
// and their CRCs are valid. 'part' marks the slots that hold a running core;
// a slot under reconfiguration takes no part in the vote. 'clear' resets a
// slot's counter when a new core is loaded.
// Timing: right_crc, agree and mismatch are combinational; err_count, warning
// and trojan_alarm change on the clock edge after 'check'.
module crc_voting_circuit #(
  parameter int unsigned N        = 3,
  parameter int unsigned CW       = 5,
  parameter int unsigned CNT_W    = 8,
  parameter int unsigned WARN_TH  = 1,
  parameter int unsigned ALARM_TH = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    check,
  input  logic [N-1:0]            part,
  input  logic [N-1:0][CW-1:0]    crc,
  input  logic [N-1:0]            clear,
  output logic [CW-1:0]           right_crc,
  output logic                    right_found,
  output logic [N-1:0]            agree,
  output logic                    mismatch,
  output logic [N-1:0]            err,
  output logic [N-1:0][CNT_W-1:0] err_count,
  output logic [N-1:0]            warning,
  output logic [N-1:0]            trojan_alarm
);

  majority_vote #(.N(N), .W(CW)) u_majority (
    .din      (crc),
    .part     (part),
    .maj      (right_crc),
    .maj_found(right_found),
    .agree    (agree),
    .mismatch (mismatch)
  );

  // An IP is in error only when a majority exists to hold it against.
  assign err = (right_found && check) ? (part & ~agree) : '0;

  error_tracker #(.N(N), .CNT_W(CNT_W), .WARN_TH(WARN_TH), .ALARM_TH(ALARM_TH)) u_alarm (
    .clk      (clk),
    .rst_n    (rst_n),
    .check    (check),
    .err      (err),
    .clear    (clear),
    .err_count(err_count),
    .warning  (warning),
    .alarm    (trojan_alarm)
  );

endmodule
