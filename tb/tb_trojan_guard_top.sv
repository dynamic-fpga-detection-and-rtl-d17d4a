// tb_trojan_guard_top: end-to-end run of the protection system at its default
// parameters (3 slots, 8 cores, 8-bit words, rotation every 4096 cycles,
// authority report every 16384 cycles).
//
// The IP here is a small logic unit, y = (5x) xor 3Ch, bought as eight
// variants. Variant 2 carries a leak Trojan of the key-xor-PRNG kind that is
// active in every cycle; variant 5 carries the same Trojan active in odd
// cycles only; the rest are clean. A model of the configuration engine loads
// the requested variant into a slot 20 cycles after the request; while it
// loads, the slot's output is garbage.
//
// Phases: SB (single IP, obfuscated link looped back to the receiver),
// MRVO unbiased, MRVO biased, MCRC, then after a reset MV. In each cycle the
// output must be what the scheme says: slot 0's word (single), the chosen
// slot's word (MRVO/MCRC), the reference value (MV, which must mask the
// Trojan). The CRC logger's rows and the authority report are checked too.
// Every mechanism must happen at least once: obfuscation round trip, unbiased
// and biased selection, weight learning, CRC mismatch, warning, Trojan alarm,
// eviction, rotation (round-robin, and random in the biased MRVO phase),
// certificate weight load, MV masking, logger rows, report with an infected core,
// scheme switch.
module tb_trojan_guard_top;
  import trojan_pkg::*;
  localparam int NS = 3, NC = 8, W = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  scheme_e scheme;
  logic biased, obf_en, beat, pr_done, log_en;
  logic [W-1:0] in_data, out_data, link_out, link_in, rx_data;
  logic [NS-1:0][W-1:0] slot_out;
  logic out_valid;
  logic [1:0] out_slot, pr_slot, log_slot;
  logic mismatch, majority_crc_ok, pr_req, no_spare, evict_event, rotate_event, report_valid;
  logic [4:0] majority_crc;
  logic [NS-1:0] warning, trojan_alarm, slot_active;
  logic [NS-1:0][7:0] err_count, weight;
  logic rot_random = 0;
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

  // ---------------------------------------------------------------- models
  int  tb_core [NS];
  int  cyc = 0;
  logic [7:0] leak_prng = 8'h5B;
  localparam logic [7:0] SECRET_KEY = 8'hC3;

  function automatic logic [7:0] ref_f(input logic [7:0] x);
    return (x * 8'd5) ^ 8'h3C;
  endfunction

  function automatic bit is_trojan(input int core);
    return core == 2 || core == 5;
  endfunction

  function automatic logic [7:0] core_out(input int core, input logic [7:0] x, input int c, input logic [7:0] prng);
    logic [7:0] y;
    y = ref_f(x);
    if (core == 2) y = y ^ (SECRET_KEY ^ prng) ^ 8'h01;
    if (core == 5 && (c % 2 == 1)) y = y ^ (SECRET_KEY ^ prng) ^ 8'h01;
    return y;
  endfunction

  function automatic logic [7:0] f_ref(input logic [7:0] a);
    return { ~(a[6] ^ a[7]), a[7], a[4] ^ a[5], a[5], ~(a[2] ^ a[3]), a[3], a[0] ^ a[1], a[1] };
  endfunction

  function automatic logic [4:0] crc5(input logic [7:0] d);
    logic [12:0] r;
    r = {d, 5'b0};
    for (int b = 12; b >= 5; b--) if (r[b]) r = r ^ (13'b100101 << (b - 5));
    return r[4:0];
  endfunction

  // configuration engine: 20 cycles per load
  int pr_cnt = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    leak_prng <= {leak_prng[6:0], leak_prng[7] ^ leak_prng[5] ^ leak_prng[4] ^ leak_prng[3]};
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ------------------------------------------------------ mechanism counts
  int n_sb_trip = 0, n_sb_changed = 0, n_sel [NS], n_sel_unb = 0, n_sel_b = 0;
  int n_inf_unb = 0, n_inf_b = 0, n_mism = 0, n_warn = 0, n_alarm = 0;
  int n_evict = 0, n_rotate = 0, n_mv_mask = 0, n_log = 0, n_rep_inf = 0, n_switch = 0;
  int n_w_learn = 0, n_cert = 0, n_rot_rand = 0;

  // what the previous beat should give
  bit         exp_v;
  logic [7:0] exp_word [NS];
  logic [7:0] exp_ref;
  bit         exp_act [NS];
  int         exp_core [NS];
  scheme_e    exp_scheme;
  logic [9:0] log_exp [256];

  task automatic run(input scheme_e sch, input bit b, input bit obf, input int cycles, input bit do_log);
    if (sch != scheme) n_switch++;
    scheme = sch; biased = b; obf_en = obf;
    #1 link_in = link_out;
    #1;
    for (int t = 0; t < cycles; t++) begin
      // ---- check the output of the previous beat
      if (exp_v) begin
        if (exp_scheme == SCH_MV) begin
          check(out_valid && out_data == exp_ref, $sformatf("MV out %02h exp %02h", out_data, exp_ref));
          for (int s = 0; s < NS; s++)
            if (exp_act[s] && exp_word[s] != exp_ref && out_data == exp_ref) n_mv_mask++;
        end else if (exp_scheme == SCH_SINGLE) begin
          check(out_valid && out_data == exp_word[0], "single out");
        end else if (out_valid) begin
          check(exp_act[out_slot] && out_data == exp_word[out_slot],
                $sformatf("selected slot %0d out %02h exp %02h", out_slot, out_data, exp_word[out_slot]));
          n_sel[out_slot]++;
          if (biased) begin n_sel_b++; if (is_trojan(exp_core[out_slot])) n_inf_b++; end
          else        begin n_sel_unb++; if (is_trojan(exp_core[out_slot])) n_inf_unb++; end
        end else begin
          check(1'b0, "selection produced no output");
        end
        if (out_valid && obf_en) begin
          check(link_out == f_ref(out_data), "link carries f(out)");
          check(rx_data == out_data, "receiver recovers the word");
          n_sb_trip++;
          if (link_out != out_data) n_sb_changed++;
        end
      end
      if (mismatch)     n_mism++;
      if (|warning)     n_warn++;
      if (|trojan_alarm) n_alarm++;
      if (evict_event) begin
        n_evict++;
      end
      if (rotate_event) begin
        n_rotate++;
        if (rot_random) n_rot_rand++;
      end
      if (report_valid) begin
        for (int c = 0; c < NC; c++) begin
          if (report_class[c] == CLS_INFECTED) begin
            n_rep_inf++;
            check(is_trojan(c), $sformatf("clean core %0d reported infected", c));
          end
        end
      end
      if (biased && weight[0] != 8'd128) n_w_learn++;

      // ---- configuration engine
      if (pr_done) begin
        pr_done = 0;
      end else if (pr_req) begin
        if (pr_cnt == 19) begin
          tb_core[pr_slot] = int'(pr_core);
          pr_done = 1;
          pr_cnt  = 0;
        end else pr_cnt++;
      end
      for (int s = 0; s < NS; s++)
        check(!slot_active[s] || int'(slot_core[s]) == tb_core[s], $sformatf("slot %0d map", s));

      // ---- next beat
      beat    = 1;
      in_data = 8'($urandom);
      for (int s = 0; s < NS; s++) begin
        if (pr_req && int'(pr_slot) == s) slot_out[s] = 8'($urandom);   // region being reloaded
        else slot_out[s] = core_out(tb_core[s], in_data, cyc, leak_prng);
        exp_word[s] = slot_out[s];
        exp_act[s]  = slot_active[s];
        exp_core[s] = tb_core[s];
      end
      exp_ref    = ref_f(in_data);
      exp_v      = 1;
      exp_scheme = sch;
      log_en     = do_log && (t < 100);
      log_slot   = 2'd0;
      if (log_en) begin
        log_exp[n_log] = {crc5(in_data), crc5(slot_out[0])};
        n_log++;
      end
      link_in    = link_out;
      @(posedge clk);
      #1 link_in = link_out;
      @(negedge clk);
      link_in = link_out;
    end
  endtask

  task automatic do_reset();
    beat = 0; pr_done = 0; pr_cnt = 0; exp_v = 0;
    rst_n = 0;
    for (int s = 0; s < NS; s++) tb_core[s] = s;
    repeat (2) @(negedge clk);
    rst_n = 1;
  endtask

  initial begin
    scheme = SCH_SINGLE; biased = 0; obf_en = 0; beat = 0; in_data = 0; slot_out = '0;
    pr_done = 0; log_en = 0; log_slot = 0; log_rd_addr = 0; link_in = 0;
    do_reset();
    @(negedge clk);

    // SB: a single IP (slot 0 runs clean core 0) behind the confusion function.
    run(SCH_SINGLE, 0, 1, 300, 0);

    // MRVO, unbiased then biased. Slot 2 holds Trojan core 2. The logger
    // records slot 0 for the first 100 beats.
    run(SCH_MRVO, 0, 0, 9000, 1);
    rot_random = 1;   // replacement slot drawn at random in this phase
    run(SCH_MRVO, 1, 1, 9000, 0);
    rot_random = 0;

    // Certificate weights: the authority rates slot 0's core low.
    @(negedge clk);
    cert_weight[0] = 8'd3; cert_load = 3'b001;
    @(negedge clk);
    cert_load = '0;
    #1;
    check(weight[0] == 8'd3, $sformatf("certificate weight loaded (%0d)", weight[0]));
    if (weight[0] == 8'd3) n_cert++;

    // Logger read-back: rows hold {crc(input), crc(slot-0 output)}.
    check(int'(log_count) == 100, $sformatf("logger holds %0d rows", log_count));
    beat = 0;
    for (int a = 0; a < 100; a++) begin
      log_rd_addr = 8'(a);
      @(negedge clk);
      check(log_rd_data == log_exp[a], $sformatf("logger row %0d = %03h exp %03h", a, log_rd_data, log_exp[a]));
    end
    exp_v = 0;

    // MCRC with biased selection: CRC voting finds and evicts Trojan cores.
    run(SCH_MCRC, 1, 0, 20000, 0);
    check(core_infected[2], "core 2 marked infected by CRC voting");
    for (int c = 0; c < NC; c++)
      if (!is_trojan(c)) check(!core_infected[c], $sformatf("clean core %0d not marked", c));

    // MV after a fresh start: the Trojan must never reach the output.
    do_reset();
    @(negedge clk);
    run(SCH_MV, 0, 0, 9000, 0);
    check(core_infected[2], "core 2 marked infected by MV");
    beat = 0;

    check(n_sb_trip > 0 && n_sb_changed > 0, $sformatf("SB round trips %0d", n_sb_trip));
    check(n_sel[0] > 0 && n_sel[1] > 0 && n_sel[2] > 0, "every slot selected");
    check(n_sel_unb > 0 && n_sel_b > 0, "both selection modes used");
    check(n_inf_unb * 100 > n_sel_unb * 15, $sformatf("unbiased picks Trojan core %0d/%0d", n_inf_unb, n_sel_unb));
    check(n_inf_b * n_sel_unb < n_inf_unb * n_sel_b / 2,
          $sformatf("biased picks Trojan core %0d/%0d", n_inf_b, n_sel_b));
    check(n_w_learn > 0, "weights learned");
    check(n_mism > 0, "mismatch seen");
    check(n_warn > 0, "warning raised");
    check(n_alarm > 0, "Trojan alarm raised");
    check(n_evict > 0, "core evicted");
    check(n_rotate > 0, "slot rotated");
    check(n_rot_rand > 0, "random replacement happened");
    check(n_mv_mask > 0, "MV masked a Trojan word");
    check(n_log > 0, "logger enabled");
    check(n_rep_inf > 0, "authority report lists an infected core");
    check(n_switch >= 3, "scheme switched");
    check(n_cert > 0, "certificate weight used");
    $display("counts: sb=%0d sel=%0d/%0d/%0d trojan-picked unbiased %0d/%0d biased %0d/%0d mism=%0d warn=%0d alarm=%0d evict=%0d rotate=%0d mvmask=%0d log=%0d rep_inf=%0d switch=%0d",
             n_sb_trip, n_sel[0], n_sel[1], n_sel[2], n_inf_unb, n_sel_unb, n_inf_b, n_sel_b,
             n_mism, n_warn, n_alarm, n_evict, n_rotate, n_mv_mask, n_log, n_rep_inf, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
