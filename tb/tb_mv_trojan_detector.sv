// tb_mv_trojan_detector: checks the multiple-variant Trojan detector.
//
// Three variants compute the same reference function of a random input. Slot
// 1 carries a Trojan that XORs a leaked key byte into its output on a rare
// trigger. The safe output must always equal the reference value one cycle
// after the beat. The Trojan sits in slot 1 for the first 300 beats and in
// slot 0 after that. Each slot's counter must match the number of times its
// Trojan fired, the alarm must rise after the fifth error, and a slot taken
// out of 'part' must not be counted.
module tb_mv_trojan_detector;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [N-1:0] part, clear;
  logic [N-1:0][7:0] ip_out;
  logic [7:0] safe_out;
  logic safe_valid, mismatch;
  logic [N-1:0] agree, err, warning, trojan_alarm;
  logic [N-1:0][7:0] err_count;
  int n_err [N], n_mismatch = 0, tslot;
  logic [7:0] expect_q;
  bit expect_v;

  mv_trojan_detector #(.N(N), .W(8), .CNT_W(8), .WARN_TH(1), .ALARM_TH(4)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [7:0] ref_f(input logic [7:0] x);
    return (x * 8'd5) ^ 8'h3C;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [7:0] x;
    in_valid = 0; part = '1; clear = '0; ip_out = '0;
    expect_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      if (expect_v) begin
        check(safe_valid && safe_out == expect_q, $sformatf("t=%0d safe %02h exp %02h", t, safe_out, expect_q));
      end else begin
        check(!safe_valid, "no beat, no safe output");
      end
      for (int i = 0; i < N; i++) begin
        check(int'(err_count[i]) == n_err[i], $sformatf("t=%0d slot %0d count %0d exp %0d", t, i, err_count[i], n_err[i]));
        check(trojan_alarm[i] == (n_err[i] > 4), $sformatf("t=%0d slot %0d alarm", t, i));
      end
      if (mismatch) n_mismatch++;
      in_valid = ($urandom % 4) != 0;
      part     = (t >= 500 && t < 520) ? 3'b110 : 3'b111;
      tslot    = (t < 300) ? 1 : 0;
      x = 8'($urandom);
      for (int i = 0; i < N; i++) ip_out[i] = ref_f(x);
      if (x[3:0] == 4'hA) ip_out[tslot] = ip_out[tslot] ^ 8'hA5;     // Trojan fires
      expect_v = in_valid;
      expect_q = ref_f(x);
      @(posedge clk);
      if (in_valid && part[tslot] && x[3:0] == 4'hA) n_err[tslot] = (n_err[tslot] < 255) ? n_err[tslot] + 1 : 255;
    end
    check(n_err[0] > 5 && n_err[1] > 5 && n_mismatch > 0, "Trojan fired and was outvoted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
