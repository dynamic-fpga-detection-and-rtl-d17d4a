// error_tracker: the alarm circuit with one error counter per IP.
//
// In each cycle where 'check' is high a vote has been taken and 'err' marks
// the IPs whose output (or CRC) differed from the majority; their counters go
// up by one, saturating. A counter is cleared when its slot is reloaded
// ('clear'). Two levels follow the paper's graded response, where a first
// discrepancy may be a design bug rather than a Trojan:
//   warning[i] : err_count >= WARN_TH (a first, small warning)
//   alarm[i]   : err_count >  ALARM_TH (the Trojan alarm: the core is
//                declared infected and replaced)
// The threshold values are not given in the paper; the defaults are this
// design's choice.
//
// Timing: counters, warning and alarm change on the edge after 'check'.
module error_tracker #(
  parameter int unsigned N        = 3,
  parameter int unsigned CNT_W    = 8,
  parameter int unsigned WARN_TH  = 1,
  parameter int unsigned ALARM_TH = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    check,
  input  logic [N-1:0]            err,
  input  logic [N-1:0]            clear,
  output logic [N-1:0][CNT_W-1:0] err_count,
  output logic [N-1:0]            warning,
  output logic [N-1:0]            alarm
);

  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_count <= '0;
    end else begin
      for (int i = 0; i < int'(N); i++) begin
        if (clear[i])                                          err_count[i] <= '0;
        else if (check && err[i] && (err_count[i] != CNT_MAX)) err_count[i] <= err_count[i] + 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      warning[i] = (32'(err_count[i]) >= WARN_TH);
      alarm[i]   = (32'(err_count[i]) >  ALARM_TH);
    end
  end

endmodule
