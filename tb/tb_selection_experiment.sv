// tb_selection_experiment: the selection-criteria experiment, run on the full
// system at its default parameters.
//
// Three variants of a serial-transmitter-like IP run in the three slots; the
// variant in slot 2 is infected. In one experiment its Trojan is active in
// every cycle, in the other only in odd cycles. The system runs in MRVO mode
// for 1000 beats with unbiased and then with biased selection (a reset
// between runs, so the weights start at half scale). For each run the share of
// beats in which the infected slot was chosen and in which the system output
// was wrong is printed. Published figures for this experiment: unbiased 30%
// (infected IP) / 30% (infected output) and biased 2% / 2% with an always-on
// Trojan; 30% / 15% and 20% / 10% with the odd-cycle Trojan.
// Checks: the counts are measured independently from the slot outputs, the
// unbiased share lies near one third, the output is wrong only when the
// infected slot is chosen, and biased selection picks the infected slot less
// often than unbiased selection does with the always-on Trojan.
module tb_selection_experiment;
  import trojan_pkg::*;
  localparam int NS = 3, NC = 8, W = 8, BEATS = 1000;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  scheme_e scheme;
  logic biased, obf_en, beat, pr_done, log_en;
  logic rot_random = 0;
  logic [W-1:0] in_data, out_data, link_out, link_in, rx_data;
  logic [NS-1:0][W-1:0] slot_out;
  logic out_valid;
  logic [1:0] out_slot, pr_slot, log_slot;
  logic mismatch, majority_crc_ok, pr_req, no_spare, evict_event, rotate_event, report_valid;
  logic [4:0] majority_crc;
  logic [NS-1:0] warning, trojan_alarm, slot_active;
  logic [NS-1:0][7:0] err_count, weight;
  logic [NS-1:0] cert_load = '0;
  logic [NS-1:0][7:0] cert_weight = '0;
  logic [2:0] pr_core;
  pr_reason_e pr_reason;
  logic [NS-1:0][2:0] slot_core;
  logic [NC-1:0] core_infected;
  logic [7:0] log_rd_addr, log_wr_ptr;
  logic [9:0] log_rd_data;
  logic [8:0] log_count;
  logic [NC-1:0][7:0] report_score;
  core_class_e [NC-1:0] report_class;

  trojan_guard_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [7:0] ref_f(input logic [7:0] x);
    return {x[0], x[7:1]} ^ 8'h96;
  endfunction

  // Runs one experiment; returns percentages of infected-IP and infected-output beats.
  task automatic experiment(input bit odd_only, input bit b, output int pct_ip, output int pct_out);
    logic [7:0] good, sent [NS];
    int n_ip, n_out, n_sel;
    bit prev_v;
    rst_n = 0; beat = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    scheme = SCH_MRVO; biased = b;
    n_ip = 0; n_out = 0; n_sel = 0; prev_v = 0;
    for (int t = 0; t <= BEATS; t++) begin
      if (prev_v) begin
        check(out_valid, "one output per beat");
        n_sel++;
        if (out_slot == 2) n_ip++;
        if (out_data != good) begin
          n_out++;
          check(out_slot == 2, "wrong output only from the infected slot");
        end
        check(out_data == sent[out_slot], "output is the chosen slot's word");
      end
      if (t == BEATS) break;
      beat = 1;
      in_data = 8'($urandom);
      good = ref_f(in_data);
      for (int s = 0; s < NS; s++) sent[s] = good;
      if (!odd_only || (t % 2 == 1)) sent[2] = good ^ 8'h5A;      // Trojan active
      for (int s = 0; s < NS; s++) slot_out[s] = sent[s];
      prev_v = 1;
      @(negedge clk);
    end
    beat = 0;
    pct_ip  = (100 * n_ip)  / n_sel;
    pct_out = (100 * n_out) / n_sel;
    check(n_sel == BEATS, $sformatf("%0d beats selected", n_sel));
  endtask

  initial begin
    int ip_u, out_u, ip_b, out_b;
    scheme = SCH_MRVO; biased = 0; obf_en = 0; beat = 0; in_data = 0; slot_out = '0;
    pr_done = 0; log_en = 0; log_slot = 0; log_rd_addr = 0; link_in = 0;
    @(negedge clk);

    experiment(0, 0, ip_u, out_u);
    experiment(0, 1, ip_b, out_b);
    $display("Trojan active in all cycles:  unbiased %0d%% IP / %0d%% output, biased %0d%% IP / %0d%% output",
             ip_u, out_u, ip_b, out_b);
    check(ip_u >= 27 && ip_u <= 40, "unbiased picks the infected IP about one time in three");
    check(out_u == ip_u, "always-on Trojan: every infected pick is a wrong output");
    check(ip_b < ip_u / 2, "biased selection avoids the infected IP");

    experiment(1, 0, ip_u, out_u);
    experiment(1, 1, ip_b, out_b);
    $display("Trojan active in odd cycles: unbiased %0d%% IP / %0d%% output, biased %0d%% IP / %0d%% output",
             ip_u, out_u, ip_b, out_b);
    check(ip_u >= 27 && ip_u <= 40, "unbiased picks the infected IP about one time in three");
    check(out_u < ip_u && out_u > ip_u / 4, "odd-cycle Trojan: about half of the infected picks are wrong");
    check(out_b <= ip_b, "biased: wrong outputs only from infected picks");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
