// tb_pr_controller: checks the alarm handling unit and the core queue.
//
// Three slots, seven cores, a rotation period of 20 cycles. Cores 1 and 3 carry
// Trojans: while one of them runs, its slot's alarm rises now and then. A
// model of the PR engine answers each request after 1 to 6 cycles. A
// reference model kept here (slot map, FIFO of waiting cores, infected set,
// round-robin index, period timer) is stepped each cycle with the same inputs
// (for part of the run rotation picks its slot from a random word instead)
// and every output of the controller is compared with it. In the last phase
// every slot alarms, so the queue runs dry and 'no_spare' must rise.
// The run must contain evictions, rotations and a no-spare event.
module tb_pr_controller;
  import trojan_pkg::*;
  localparam int NS = 3, NC = 7, P = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic evict_en, rotate_en, rot_random, pr_done;
  logic [15:0] rnd;
  logic [NS-1:0] alarm;
  logic pr_req;
  logic [1:0] pr_slot;
  logic [2:0] pr_core;
  pr_reason_e pr_reason;
  logic [NS-1:0][2:0] slot_core;
  logic [NS-1:0] slot_active, slot_clear;
  logic [NC-1:0] core_infected;
  logic no_spare, evict_event, rotate_event;

  pr_controller #(.N_SLOTS(NS), .N_CORES(NC), .PERIOD(P)) dut (.*);

  always #5 clk = ~clk;

  // reference model
  int m_slot [NS];
  bit m_act [NS];
  bit m_clear [NS];
  bit m_inf [NC];
  int m_q [$];
  int m_rr, m_per;
  bit m_pend, m_req, m_nospare, m_ev, m_rot;
  int m_ps, m_pc;
  pr_reason_e m_reason;
  int n_evict = 0, n_rotate = 0, n_nospare = 0;
  int n_rand_slot [NS] = '{default: 0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic model_step();
    bit pend_next;
    int s;
    for (int i = 0; i < NS; i++) m_clear[i] = 0;
    m_ev = 0; m_rot = 0;
    pend_next = m_pend;
    if (rotate_en) begin
      if (m_per == P - 1) begin m_per = 0; pend_next = 1; end
      else m_per++;
    end
    s = -1;
    for (int i = NS - 1; i >= 0; i--) if (alarm[i] && m_act[i]) s = i;
    if (m_req) begin
      if (pr_done) begin m_req = 0; m_slot[m_ps] = m_pc; m_act[m_ps] = 1; end
    end else if (evict_en && s >= 0) begin
      m_inf[m_slot[s]] = 1; m_ev = 1; m_act[s] = 0; m_clear[s] = 1;
      if (m_q.size() > 0) begin
        m_req = 1; m_ps = s; m_pc = m_q.pop_front(); m_reason = PR_EVICT;
      end else m_nospare = 1;
    end else if (m_pend && rotate_en) begin
      int r;
      pend_next = 0;
      r = rot_random ? int'((longint'(rnd) * NS) >> 16) : m_rr;
      m_rr = (m_rr + 1) % NS;
      if (m_q.size() > 0 && m_act[r]) begin
        if (rot_random) n_rand_slot[r]++;
        m_q.push_back(m_slot[r]);
        m_pc = m_q.pop_front();
        m_req = 1; m_ps = r; m_reason = PR_ROTATE;
        m_act[r] = 0; m_clear[r] = 1; m_rot = 1;
      end
    end
    m_pend = pend_next;
  endtask

  task automatic compare(input int t);
    check(pr_req == m_req, $sformatf("t=%0d pr_req %0d exp %0d", t, pr_req, m_req));
    if (m_req) check(int'(pr_slot) == m_ps && int'(pr_core) == m_pc && pr_reason == m_reason,
                     $sformatf("t=%0d request slot %0d core %0d exp %0d %0d", t, pr_slot, pr_core, m_ps, m_pc));
    for (int i = 0; i < NS; i++) begin
      check(int'(slot_core[i]) == m_slot[i], $sformatf("t=%0d slot %0d core %0d exp %0d", t, i, slot_core[i], m_slot[i]));
      check(slot_active[i] == m_act[i], $sformatf("t=%0d slot %0d active", t, i));
      check(slot_clear[i] == m_clear[i], $sformatf("t=%0d slot %0d clear", t, i));
    end
    for (int c = 0; c < NC; c++) check(core_infected[c] == m_inf[c], $sformatf("t=%0d core %0d infected", t, c));
    check(no_spare == m_nospare && evict_event == m_ev && rotate_event == m_rot,
          $sformatf("t=%0d events", t));
  endtask

  initial begin
    int cnt, lat;
    evict_en = 0; rotate_en = 0; rot_random = 0; rnd = '0; alarm = '0; pr_done = 0;
    for (int i = 0; i < NS; i++) begin m_slot[i] = i; m_act[i] = 1; end
    for (int c = NS; c < NC; c++) m_q.push_back(c);
    m_rr = 0; m_per = 0; m_pend = 0; m_req = 0; m_nospare = 0; m_reason = PR_ROTATE;
    cnt = 0; lat = 3;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      compare(t);
      if (evict_event)  n_evict++;
      if (rotate_event) n_rotate++;
      if (no_spare)     n_nospare++;
      // PR engine model
      if (pr_done) begin pr_done = 0; cnt = 0; lat = 1 + $urandom % 6; end
      else if (pr_req) begin
        if (cnt >= lat) pr_done = 1; else cnt++;
      end
      evict_en  = (t < 2500) ? (t % 500) < 400 : 1'b1;
      rotate_en = (t % 700) < 600;
      rot_random = (t >= 1000) && (t < 2500);
      rnd = 16'($urandom);
      for (int i = 0; i < NS; i++)
        alarm[i] = (t >= 2500) ? 1'b1
                 : (((slot_core[i] == 1) || (slot_core[i] == 3)) && ($urandom % 10 == 0));
      @(posedge clk);
      model_step();
      @(negedge clk);
    end
    check(n_evict > 0 && n_rotate > 0 && n_nospare > 0,
          $sformatf("evictions %0d rotations %0d no-spare %0d", n_evict, n_rotate, n_nospare));
    for (int i = 0; i < NS; i++)
      check(n_rand_slot[i] > 0, $sformatf("random rotation never chose slot %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
