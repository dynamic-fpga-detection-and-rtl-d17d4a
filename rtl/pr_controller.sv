// pr_controller: the Trojan alarm handling unit and the core queue of
// Algorithm 1 (multiplexing reconfigurable IPs).
//
// The system owns N_CORES variants of a suspect IP (cores 0..N_CORES-1, e.g.
// one per vendor) but only N_SLOTS reconfigurable regions. After reset slot s
// runs core s and cores N_SLOTS..N_CORES-1 wait in a FIFO queue. Two events
// reload a slot through partial reconfiguration (PR):
//   evict  : a slot's Trojan alarm is high (and 'evict_en'). Its core is
//            marked infected for good and never re-enters the queue; the
//            queue head is loaded in its place. With an empty queue the slot
//            is taken out of service instead ('no_spare').
//   rotate : every PERIOD cycles (when 'rotate_en'), slot i gets the queue
//            head, its old core goes to the queue tail, and i = (i+1) mod
//            N_SLOTS, as in Algorithm 1 lines 13-15. With 'rot_random' high
//            the slot is drawn at random instead, floor(rnd*N_SLOTS/2^16):
//            the "or even randomly" replacement the paper suggests.
// An eviction takes priority over a due rotation, which waits until the PR
// port is free. Only one PR runs at a time.
//
// PR port (to the FPGA configuration engine, outside this design): pr_req is
// held high with pr_slot/pr_core stable until the engine pulses pr_done. While
// a slot is being reloaded its slot_active bit is low, so voting and selection
// ignore it. 'slot_clear' pulses for one cycle when a reload is issued, to
// reset that slot's error counter and weight.
// The queue order, the priority and the handshake are this design's choices;
// the paper gives the algorithm but no hardware for it.
module pr_controller #(
  parameter int unsigned N_SLOTS = 3,
  parameter int unsigned N_CORES = 8,
  parameter int unsigned PERIOD  = 4096,
  localparam int unsigned CID_W  = (N_CORES > 1) ? $clog2(N_CORES) : 1,
  localparam int unsigned SID_W  = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          evict_en,
  input  logic                          rotate_en,
  input  logic                          rot_random,
  input  logic [15:0]                   rnd,
  input  logic [N_SLOTS-1:0]            alarm,
  // PR engine handshake
  output logic                          pr_req,
  output logic [SID_W-1:0]              pr_slot,
  output logic [CID_W-1:0]              pr_core,
  output trojan_pkg::pr_reason_e        pr_reason,
  input  logic                          pr_done,
  // state
  output logic [N_SLOTS-1:0][CID_W-1:0] slot_core,
  output logic [N_SLOTS-1:0]            slot_active,
  output logic [N_SLOTS-1:0]            slot_clear,
  output logic [N_CORES-1:0]            core_infected,
  output logic                          no_spare,
  output logic                          evict_event,
  output logic                          rotate_event
);
  import trojan_pkg::*;

  localparam int unsigned QP_W  = CID_W;
  localparam int unsigned QC_W  = $clog2(N_CORES + 1);
  localparam int unsigned PER_W = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  logic [N_CORES-1:0][CID_W-1:0] queue;
  logic [QP_W-1:0]               q_head, q_tail;
  logic [QC_W-1:0]               q_count;
  logic [SID_W-1:0]              rr_idx;
  logic [PER_W-1:0]              per_cnt;
  logic                          rot_pending;

  logic                          alarm_hit;
  logic [SID_W-1:0]              rot_slot;
  logic [SID_W+16:0]             rot_prod;
  logic [SID_W-1:0]              alarm_slot;

  function automatic logic [QP_W-1:0] q_next(input logic [QP_W-1:0] p);
    return (32'(p) == N_CORES - 1) ? '0 : p + 1'b1;
  endfunction

  // Lowest-numbered active slot with its alarm raised.
  always_comb begin
    alarm_hit  = 1'b0;
    alarm_slot = '0;
    for (int s = N_SLOTS - 1; s >= 0; s--) begin
      if (alarm[s] && slot_active[s]) begin
        alarm_hit  = 1'b1;
        alarm_slot = SID_W'(s);
      end
    end
  end

  // Slot to rotate next: round-robin, or random from the shared generator.
  always_comb begin
    rot_prod = (SID_W + 17)'(rnd) * (SID_W + 17)'(N_SLOTS);
    rot_slot = rot_random ? SID_W'(rot_prod >> 16) : rr_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(N_SLOTS); s++) slot_core[s] <= CID_W'(s);
      for (int q = 0; q < int'(N_CORES); q++)
        queue[q] <= (q + int'(N_SLOTS) < int'(N_CORES)) ? CID_W'(q + int'(N_SLOTS)) : '0;
      q_head        <= '0;
      q_tail        <= QP_W'((N_CORES > N_SLOTS) ? (N_CORES - N_SLOTS) % N_CORES : 0);
      q_count       <= QC_W'((N_CORES > N_SLOTS) ? N_CORES - N_SLOTS : 0);
      slot_active   <= '1;
      slot_clear    <= '0;
      core_infected <= '0;
      no_spare      <= 1'b0;
      pr_req        <= 1'b0;
      pr_slot       <= '0;
      pr_core       <= '0;
      pr_reason     <= PR_ROTATE;
      rr_idx        <= '0;
      per_cnt       <= '0;
      rot_pending   <= 1'b0;
      evict_event   <= 1'b0;
      rotate_event  <= 1'b0;
    end else begin
      slot_clear   <= '0;
      evict_event  <= 1'b0;
      rotate_event <= 1'b0;

      // Period timer (Algorithm 1, "periodic time elapsed").
      if (rotate_en) begin
        if (32'(per_cnt) == PERIOD - 1) begin
          per_cnt     <= '0;
          rot_pending <= 1'b1;
        end else begin
          per_cnt <= per_cnt + 1'b1;
        end
      end

      if (pr_req) begin
        if (pr_done) begin
          pr_req               <= 1'b0;
          slot_core[pr_slot]   <= pr_core;
          slot_active[pr_slot] <= 1'b1;
        end
      end else if (evict_en && alarm_hit) begin
        core_infected[slot_core[alarm_slot]] <= 1'b1;
        evict_event                          <= 1'b1;
        slot_active[alarm_slot]              <= 1'b0;
        slot_clear[alarm_slot]               <= 1'b1;
        if (q_count != '0) begin
          pr_req    <= 1'b1;
          pr_slot   <= alarm_slot;
          pr_core   <= queue[q_head];
          pr_reason <= PR_EVICT;
          q_head    <= q_next(q_head);
          q_count   <= q_count - 1'b1;
        end else begin
          no_spare  <= 1'b1;
        end
      end else if (rot_pending && rotate_en) begin
        rot_pending <= 1'b0;
        rr_idx      <= (32'(rr_idx) == N_SLOTS - 1) ? '0 : rr_idx + 1'b1;
        if (q_count != '0 && slot_active[rot_slot]) begin
          // Old core goes to the tail, head comes in: count is unchanged.
          queue[q_tail]         <= slot_core[rot_slot];
          q_tail                <= q_next(q_tail);
          q_head                <= q_next(q_head);
          pr_req                <= 1'b1;
          pr_slot               <= rot_slot;
          pr_core               <= queue[q_head];
          pr_reason             <= PR_ROTATE;
          slot_active[rot_slot] <= 1'b0;
          slot_clear[rot_slot]  <= 1'b1;
          rotate_event         <= 1'b1;
        end
      end
    end
  end

  // The PR engine may only finish a request that is pending.
  a_done_needs_req: assert property (@(posedge clk) disable iff (!rst_n) pr_done |-> pr_req);
  // The request must hold its slot and core until it is done.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 pr_req && !pr_done |=> pr_req && $stable(pr_slot) && $stable(pr_core));

endmodule
