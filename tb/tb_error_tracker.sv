// tb_error_tracker: checks the per-IP error counters and the two alarm levels.
//
// Random check/err/clear patterns are applied and compared each cycle with an
// integer model; warning must be set from the first error (WARN_TH = 1) and
// the alarm only once a count exceeds ALARM_TH = 4, i.e. from the fifth error.
// A long error run checks that the 4-bit counters saturate.
module tb_error_tracker;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic check_i;
  logic [N-1:0] err, clear;
  logic [N-1:0][3:0] err_count;
  logic [N-1:0] warning, alarm;
  int model [N];
  int n_alarm = 0;

  error_tracker #(.N(N), .CNT_W(4), .WARN_TH(1), .ALARM_TH(4)) dut (
    .clk(clk), .rst_n(rst_n), .check(check_i), .err(err), .clear(clear),
    .err_count(err_count), .warning(warning), .alarm(alarm));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    check_i = 0; err = '0; clear = '0;
    for (int i = 0; i < N; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        check(int'(err_count[i]) == model[i], $sformatf("t=%0d count[%0d]=%0d exp %0d", t, i, err_count[i], model[i]));
        check(warning[i] == (model[i] >= 1), $sformatf("t=%0d warning[%0d]", t, i));
        check(alarm[i] == (model[i] > 4), $sformatf("t=%0d alarm[%0d] count %0d", t, i, model[i]));
        if (alarm[i]) n_alarm++;
      end
      check_i = $urandom % 2;
      err     = N'($urandom);
      err[0]  = (t < 2000) ? 1'b1 : err[0];  // slot 0 saturates early
      clear   = (($urandom % 40) == 0) ? N'(1 << ($urandom % N)) : '0;
      if (t < 2000) clear[0] = 1'b0;
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (clear[i])                 model[i] = 0;
        else if (check_i && err[i])   model[i] = (model[i] < 15) ? model[i] + 1 : 15;
      end
    end
    check(n_alarm > 0, "alarm raised at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
