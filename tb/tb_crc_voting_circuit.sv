// tb_crc_voting_circuit: checks CRC voting with three IPs.
//
// Each beat, the three IP outputs are a common byte, with slot 2 sometimes
// corrupted (a Trojan that fires on a rare input pattern) and slot 1
// corrupted once (a one-off bug). The CRCs are worked out here by long
// division and fed to the circuit. The majority CRC, the error vector and
// every counter are checked against a model; slot 1 must get only a warning,
// slot 2 the Trojan alarm after its fifth error, and a clear must reset it.
module tb_crc_voting_circuit;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic check_i;
  logic [N-1:0] part, clear;
  logic [N-1:0][4:0] crc;
  logic [4:0] right_crc;
  logic right_found, mismatch;
  logic [N-1:0] agree, err, warning, trojan_alarm;
  logic [N-1:0][7:0] err_count;
  int model [N];
  int n_alarm = 0;

  crc_voting_circuit #(.N(N), .CW(5), .CNT_W(8), .WARN_TH(1), .ALARM_TH(4)) dut (
    .clk(clk), .rst_n(rst_n), .check(check_i), .part(part), .crc(crc), .clear(clear),
    .right_crc(right_crc), .right_found(right_found), .agree(agree), .mismatch(mismatch),
    .err(err), .err_count(err_count), .warning(warning), .trojan_alarm(trojan_alarm));

  always #5 clk = ~clk;

  function automatic logic [4:0] crc5(input logic [7:0] d);
    logic [12:0] r;
    r = {d, 5'b0};
    for (int b = 12; b >= 5; b--) if (r[b]) r = r ^ (13'b100101 << (b - 5));
    return r[4:0];
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [7:0] good, o [N];
    logic [4:0] c [N];
    bit bad [N];
    check_i = 0; part = '1; clear = '0; crc = '0;
    for (int i = 0; i < N; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      good = 8'($urandom);
      for (int i = 0; i < N; i++) o[i] = good;
      bad[0] = 0;
      bad[1] = (t == 50);
      bad[2] = (good[2:0] == 3'b101) && (t < 300);       // rare trigger
      if (bad[1]) o[1] = good ^ 8'h01;
      if (bad[2]) o[2] = good ^ 8'h80;
      for (int i = 0; i < N; i++) begin c[i] = crc5(o[i]); crc[i] = c[i]; end
      check_i = 1;
      clear   = (t == 320) ? 3'b100 : 3'b000;
      #1;
      check(right_found && right_crc == crc5(good), $sformatf("t=%0d right crc %02h exp %02h", t, right_crc, crc5(good)));
      for (int i = 0; i < N; i++) begin
        // A corrupted byte whose CRC happens to match is not an error.
        bit e;
        e = (c[i] != crc5(good));
        check(err[i] == e, $sformatf("t=%0d err[%0d]", t, i));
      end
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (clear[i]) model[i] = 0;
        else if (c[i] != crc5(good)) model[i]++;
      end
      #1;
      for (int i = 0; i < N; i++) begin
        check(int'(err_count[i]) == model[i], $sformatf("t=%0d count[%0d]=%0d exp %0d", t, i, err_count[i], model[i]));
        check(trojan_alarm[i] == (model[i] > 4), $sformatf("t=%0d alarm[%0d]", t, i));
        check(warning[i] == (model[i] >= 1), $sformatf("t=%0d warning[%0d]", t, i));
      end
      if (trojan_alarm[2]) n_alarm++;
    end
    check(warning[1] && !trojan_alarm[1], "one-off bug gives a warning only");
    check(n_alarm > 0, "Trojan alarm raised for slot 2");
    // With only two participants that disagree there is no majority and no error.
    @(negedge clk);
    part = 3'b011; crc[0] = 5'h01; crc[1] = 5'h02; crc[2] = 5'h01;
    #1;
    check(!right_found && err == '0 && mismatch, "no majority among two differing CRCs");
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
