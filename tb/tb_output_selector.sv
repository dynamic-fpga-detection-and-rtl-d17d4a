// tb_output_selector: checks the MRVO multiplexer.
//
// Random random-numbers, eligibility masks and weights are applied and the
// chosen slot is compared with a model that cuts the 16-bit random range into
// equal parts (unbiased) or parts proportional to the weights (biased). The
// statistics of 30000 draws are also checked: about 1/3 each when unbiased,
// and with weights 200/200/8 the light slot must be picked rarely.
module tb_output_selector;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic        biased;
  logic [15:0] rnd;
  logic [N-1:0] eligible;
  logic [N-1:0][7:0] weight;
  logic [N-1:0][7:0] ip_out;
  logic [1:0]  sel;
  logic        sel_ok;
  logic [7:0]  dout;
  int cnt_u [N], cnt_b [N];

  output_selector #(.N(N), .W(8), .WW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Returns the expected slot, or -1 when none is eligible.
  function automatic int model_sel();
    longint sum, t, acc;
    int e, k, c;
    e = 0; sum = 0;
    for (int i = 0; i < N; i++) if (eligible[i]) begin e++; sum += weight[i]; end
    if (e == 0) return -1;
    if (biased && sum != 0) begin
      t = (longint'(rnd) * sum) / 65536;
      acc = 0;
      for (int i = 0; i < N; i++) if (eligible[i]) begin
        acc += weight[i];
        if (acc > t) return i;
      end
      return -2;
    end
    k = int'((longint'(rnd) * e) / 65536);
    c = 0;
    for (int i = 0; i < N; i++) if (eligible[i]) begin
      if (c == k) return i;
      c++;
    end
    return -2;
  endfunction

  initial begin
    int m;
    for (int i = 0; i < N; i++) ip_out[i] = 8'(8'h10 * (i + 1) + i);
    for (int n = 0; n < 20000; n++) begin
      biased   = $urandom % 2;
      rnd      = 16'($urandom);
      eligible = N'($urandom);
      for (int i = 0; i < N; i++) weight[i] = (($urandom % 8) == 0) ? 8'd0 : 8'($urandom);
      #1;
      m = model_sel();
      if (m < 0) check(!sel_ok, "nothing eligible but sel_ok set");
      else check(sel_ok && int'(sel) == m && dout == ip_out[m],
                 $sformatf("biased=%0d rnd=%04h elig=%b w=%0d/%0d/%0d sel=%0d exp %0d",
                           biased, rnd, eligible, weight[0], weight[1], weight[2], sel, m));
    end
    eligible = '1;
    weight[0] = 200; weight[1] = 200; weight[2] = 8;
    for (int n = 0; n < 30000; n++) begin
      rnd = 16'($urandom);
      biased = 0; #1; cnt_u[sel]++;
      biased = 1; #1; cnt_b[sel]++;
    end
    for (int i = 0; i < N; i++)
      check(cnt_u[i] > 9000 && cnt_u[i] < 11000, $sformatf("unbiased slot %0d picked %0d/30000", i, cnt_u[i]));
    check(cnt_b[2] < 1200, $sformatf("biased light slot picked %0d/30000", cnt_b[2]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
