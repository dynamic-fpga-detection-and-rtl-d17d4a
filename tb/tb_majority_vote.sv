// tb_majority_vote: checks the majority circuit for N = 3 and N = 5.
//
// Random words (from a small alphabet so that ties and majorities both occur)
// and random participation masks are compared with a counting model: a word
// is the majority when more than half of the participants carry it.
module tb_majority_vote;
  int checks = 0, failures = 0;
  int n_found = 0, n_none = 0;

  logic [2:0][7:0] d3;  logic [2:0] p3;  logic [7:0] m3;  logic f3, x3;  logic [2:0] a3;
  logic [4:0][7:0] d5;  logic [4:0] p5;  logic [7:0] m5;  logic f5, x5;  logic [4:0] a5;

  majority_vote #(.N(3), .W(8)) dut3 (.din(d3), .part(p3), .maj(m3), .maj_found(f3), .agree(a3), .mismatch(x3));
  majority_vote #(.N(5), .W(8)) dut5 (.din(d5), .part(p5), .maj(m5), .maj_found(f5), .agree(a5), .mismatch(x5));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic model(input logic [7:0] d [], input logic [4:0] p, input int n,
                       output bit found, output logic [7:0] maj, output bit mism);
    int np, same;
    logic [7:0] first;
    bit have_first;
    np = 0; found = 0; maj = 0; mism = 0; have_first = 0;
    for (int i = 0; i < n; i++) if (p[i]) begin
      np++;
      if (!have_first) begin first = d[i]; have_first = 1; end
      else if (d[i] != first) mism = 1;
    end
    for (int i = 0; i < n; i++) if (p[i]) begin
      same = 0;
      for (int j = 0; j < n; j++) if (p[j] && d[j] == d[i]) same++;
      if (2 * same > np && !found) begin found = 1; maj = d[i]; end
    end
  endtask

  initial begin
    logic [7:0] dd [];
    bit fo, mi;
    logic [7:0] mj;
    for (int n = 0; n < 5000; n++) begin
      dd = new[3];
      for (int i = 0; i < 3; i++) begin dd[i] = 8'($urandom % 3); d3[i] = dd[i]; end
      p3 = 3'($urandom);
      #1;
      model(dd, 5'(p3), 3, fo, mj, mi);
      check(f3 == fo && x3 == mi && (!fo || m3 == mj), $sformatf("N=3 d=%p p=%b", dd, p3));
      for (int i = 0; i < 3; i++) check(a3[i] == (fo && p3[i] && dd[i] == mj), "N=3 agree bit");
      if (fo) n_found++; else n_none++;

      dd = new[5];
      for (int i = 0; i < 5; i++) begin dd[i] = 8'($urandom % 3); d5[i] = dd[i]; end
      p5 = 5'($urandom);
      #1;
      model(dd, p5, 5, fo, mj, mi);
      check(f5 == fo && x5 == mi && (!fo || m5 == mj), $sformatf("N=5 d=%p p=%b", dd, p5));
      for (int i = 0; i < 5; i++) check(a5[i] == (fo && p5[i] && dd[i] == mj), "N=5 agree bit");
    end
    check(n_found > 100 && n_none > 100, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
