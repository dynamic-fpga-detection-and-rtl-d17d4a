// tb_lfsr_rng: checks the selection random source.
//
// The state must never be zero, must hold while 'step' is low, must come back
// to the seed after exactly 65535 steps (a maximal-length sequence) and not
// before, and the value mod 3 (the way three slots are chosen) must come out
// close to evenly over one period.
module tb_lfsr_rng;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, step = 0;
  logic [15:0] rnd, held;
  int period, hist [3];

  lfsr_rng #(.SEED(16'hACE1)) dut (.clk(clk), .rst_n(rst_n), .step(step), .rnd(rnd));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(rnd == 16'hACE1, "state after reset is the seed");
    held = rnd;
    repeat (5) @(negedge clk);
    check(rnd == held, "state holds while step is low");
    step = 1;
    period = 0;
    do begin
      @(negedge clk);
      period++;
      if (rnd == 16'h0000) check(1'b0, "state reached zero");
      hist[((rnd * 3) >> 16)]++;
    end while (rnd != 16'hACE1 && period < 70000);
    check(period == 65535, $sformatf("period %0d, expected 65535", period));
    for (int i = 0; i < 3; i++)
      check(hist[i] > 21000 && hist[i] < 22700, $sformatf("slot %0d chosen %0d times", i, hist[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
