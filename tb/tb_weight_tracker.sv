// tb_weight_tracker: checks the biased-selection weight update.
//
// Random update/part/agree/reset patterns are applied for several thousand
// cycles and every weight is compared each cycle with an integer model:
// start 128, +1 on agree, -1 on disagree, clamp to 0..255, back to 128 on a
// slot reload, the loaded value on a certificate load. Long runs of one-sided votes drive weights into both limits.
module tb_weight_tracker;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic update;
  logic [N-1:0] part, agree, reset_slot, load;
  logic [N-1:0][7:0] load_weight;
  logic [N-1:0][7:0] weight;
  int model [N];
  int hit_max = 0, hit_zero = 0;

  weight_tracker #(.N(N), .WW(8)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    update = 0; part = '0; agree = '0; reset_slot = '0; load = '0; load_weight = '0;
    for (int i = 0; i < N; i++) model[i] = 128;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++)
        check(int'(weight[i]) == model[i], $sformatf("t=%0d w[%0d]=%0d exp %0d", t, i, weight[i], model[i]));
      update     = ($urandom % 4) != 0;
      part       = N'($urandom) | N'(3'b011);
      // Phases: slot 2 mostly outvoted, then mostly agreeing.
      agree[0]   = ($urandom % 10) != 0;
      agree[1]   = ($urandom % 10) != 0;
      agree[2]   = (t < 3000) ? (($urandom % 10) == 0) : (($urandom % 10) != 0);
      reset_slot = (($urandom % 500) == 0) ? N'(1 << ($urandom % N)) : '0;
      load       = (($urandom % 300) == 0) ? N'(1 << ($urandom % N)) : '0;
      for (int i = 0; i < N; i++) load_weight[i] = 8'($urandom);
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (load[i])                  model[i] = int'(load_weight[i]);
        else if (reset_slot[i])       model[i] = 128;
        else if (update && part[i])   model[i] = agree[i] ? ((model[i] < 255) ? model[i] + 1 : 255)
                                                          : ((model[i] > 0)   ? model[i] - 1 : 0);
        if (model[i] == 255) hit_max++;
        if (model[i] == 0)   hit_zero++;
      end
    end
    check(hit_max > 0 && hit_zero > 0, "both saturation limits reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
