// tb_ca_reporter: checks the per-period authority report.
//
// Three slots run cores from a pool of six, with the slot-to-core map changed
// now and then. Errors are charged at random, heavily to one core, rarely to
// another. A model adds each error to the core in the slot; at each period end
// the reported scores and classes (safe = 0, buggy below 4, infected
// otherwise) must match, and the report must appear exactly every PERIOD_T
// cycles.
module tb_ca_reporter;
  import trojan_pkg::*;
  localparam int NS = 3, NC = 6, T = 50;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [NS-1:0] err;
  logic [NS-1:0][2:0] slot_core;
  logic report_valid;
  logic [NC-1:0][7:0] report_score;
  core_class_e [NC-1:0] report_class;
  int score [NC];
  int n_reports = 0, n_cls [3];

  ca_reporter #(.N_SLOTS(NS), .N_CORES(NC), .SCORE_W(8), .INFECT_TH(4), .PERIOD_T(T)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    core_class_e exp_c;
    err = '0;
    slot_core[0] = 0; slot_core[1] = 1; slot_core[2] = 2;
    for (int c = 0; c < NC; c++) score[c] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 10 * T; t++) begin
      // report for the period that ended at the previous edge
      if (t > 0 && (t % T) == 0) begin
        check(report_valid, $sformatf("t=%0d report expected", t));
        n_reports++;
        for (int c = 0; c < NC; c++) begin
          exp_c = (score[c] == 0) ? CLS_SAFE : (score[c] < 4) ? CLS_BUGGY : CLS_INFECTED;
          check(int'(report_score[c]) == ((score[c] > 255) ? 255 : score[c]),
                $sformatf("t=%0d core %0d score %0d exp %0d", t, c, report_score[c], score[c]));
          check(report_class[c] == exp_c, $sformatf("t=%0d core %0d class", t, c));
          n_cls[exp_c]++;
          score[c] = 0;
        end
      end else begin
        check(!report_valid, $sformatf("t=%0d unexpected report", t));
      end
      if ((t % 37) == 36) slot_core[$urandom % NS] = 3'($urandom % NC);
      for (int s = 0; s < NS; s++)
        err[s] = (slot_core[s] == 2) ? (($urandom % 5) == 0) :
                 (slot_core[s] == 1) ? (($urandom % 60) == 0) : 1'b0;
      @(posedge clk);
      for (int s = 0; s < NS; s++) if (err[s]) score[slot_core[s]]++;
      @(negedge clk);
    end
    check(n_reports == 9, $sformatf("%0d reports", n_reports));
    check(n_cls[0] > 0 && n_cls[1] > 0 && n_cls[2] > 0, "all three classes reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * T) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
