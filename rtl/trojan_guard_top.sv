// trojan_guard_top: runtime Trojan protection around N reconfigurable IP slots.
//
// The static part of an FPGA system that uses untrusted third-party IP. N_SLOTS
// reconfigurable regions each run one variant (core) of the same IP, chosen
// from N_CORES variants bought from different vendors. All slots see the same
// input word; their output words enter here on 'slot_out'. One of four schemes,
// picked at run time with 'scheme', produces the system output:
//   SCH_SINGLE : slot 0 alone (use with obfuscation for simple blockage, SB)
//   SCH_MRVO   : a random slot per beat, unbiased or weighted ('biased');
//                weights learn from comparing the slots' outputs; slots are
//                rotated through the core queue every ROT_PERIOD cycles,
//                round-robin or, with 'rot_random', a random slot each time
//   SCH_MCRC   : as MRVO, but the slots' CRCs are voted on; the CRC votes
//                update the weights and a core whose error count passes the
//                threshold is evicted and replaced by partial reconfiguration
//   SCH_MV     : the majority of the slots' outputs (safe output); outvoted
//                cores are counted, and evicted past the threshold
// With 'obf_en' the output word leaves on 'link_out' through the confusion
// function f, and words arriving on 'link_in' pass through f^-1 to 'rx_data'
// (SB at the sending and receiving ends of a shared bus).
// 'cert_load' sets slot weights from outside, e.g. from the certificate of
// the core just loaded. A CRC logger records {input CRC, output CRC} of the slot named by 'log_slot'
// while 'log_en' is high, and a reporter gives each core's error score and
// safe/buggy/infected class every CA_PERIOD cycles for the certificate
// authority.
//
// Timing: a beat is one cycle with 'beat' high, in which 'in_data' and every
// running slot's output word belong together (the IP model is assumed to give
// its output for the input in the same beat). out_data/out_valid follow one
// cycle later, in every scheme. Reconfiguration runs through the pr_req /
// pr_done handshake of pr_controller; the configuration engine and the IP cores
// themselves are outside this design.
// The block structure follows the paper's figures for each scheme; joining the
// four schemes behind one run-time select, the thresholds, periods and widths
// are this design's choices.
module trojan_guard_top
  import trojan_pkg::*;
#(
  parameter int unsigned N_SLOTS    = 3,
  parameter int unsigned N_CORES    = 8,
  parameter int unsigned W          = 8,
  parameter int unsigned W_IN       = 8,
  parameter int unsigned CNT_W      = 8,
  parameter int unsigned WARN_TH    = 1,
  parameter int unsigned ALARM_TH   = 4,
  parameter int unsigned ROT_PERIOD = 4096,
  parameter int unsigned CA_PERIOD  = 16384,
  parameter int unsigned LOG_DEPTH  = 256,
  localparam int unsigned CID_W     = (N_CORES > 1) ? $clog2(N_CORES) : 1,
  localparam int unsigned SID_W     = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1,
  localparam int unsigned LAW       = $clog2(LOG_DEPTH)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // configuration
  input  scheme_e                         scheme,
  input  logic                            biased,
  input  logic                            rot_random,
  input  logic                            obf_en,
  // IP slots
  input  logic                            beat,
  input  logic [W_IN-1:0]                 in_data,
  input  logic [N_SLOTS-1:0][W-1:0]       slot_out,
  // system output and SB link
  output logic [W-1:0]                    out_data,
  output logic                            out_valid,
  output logic [SID_W-1:0]                out_slot,
  output logic [W-1:0]                    link_out,
  input  logic [W-1:0]                    link_in,
  output logic [W-1:0]                    rx_data,
  // detection
  output logic                            mismatch,
  output logic [CRC_W-1:0]                majority_crc,
  output logic                            majority_crc_ok,
  output logic [N_SLOTS-1:0]              warning,
  output logic [N_SLOTS-1:0]              trojan_alarm,
  output logic [N_SLOTS-1:0][CNT_W-1:0]   err_count,
  output logic [N_SLOTS-1:0][WEIGHT_W-1:0] weight,
  input  logic [N_SLOTS-1:0]              cert_load,
  input  logic [N_SLOTS-1:0][WEIGHT_W-1:0] cert_weight,
  // partial reconfiguration
  output logic                            pr_req,
  output logic [SID_W-1:0]                pr_slot,
  output logic [CID_W-1:0]                pr_core,
  output pr_reason_e                      pr_reason,
  input  logic                            pr_done,
  output logic [N_SLOTS-1:0][CID_W-1:0]   slot_core,
  output logic [N_SLOTS-1:0]              slot_active,
  output logic [N_CORES-1:0]              core_infected,
  output logic                            no_spare,
  output logic                            evict_event,
  output logic                            rotate_event,
  // CRC logger
  input  logic                            log_en,
  input  logic [SID_W-1:0]                log_slot,
  input  logic [LAW-1:0]                  log_rd_addr,
  output logic [2*CRC_W-1:0]              log_rd_data,
  output logic [LAW-1:0]                  log_wr_ptr,
  output logic [LAW:0]                    log_count,
  // certificate authority report
  output logic                            report_valid,
  output logic [N_CORES-1:0][CNT_W-1:0]   report_score,
  output core_class_e [N_CORES-1:0]       report_class
);

  logic is_mrvo, is_mcrc, is_mv;
  assign is_mrvo = (scheme == SCH_MRVO);
  assign is_mcrc = (scheme == SCH_MCRC);
  assign is_mv   = (scheme == SCH_MV);

  logic [N_SLOTS-1:0] slot_clear;

  // ---------------------------------------------------------------- CRCs
  logic [N_SLOTS-1:0][CRC_W-1:0] slot_crc;
  for (genvar s = 0; s < int'(N_SLOTS); s++) begin : g_crc
    crc_calc #(.W(W), .CW(CRC_W), .POLY(CRC_POLY)) u_crc (.data(slot_out[s]), .crc(slot_crc[s]));
  end

  // ------------------------------------------------------- CRC voting (MCRC)
  logic [N_SLOTS-1:0]            crc_agree, crc_err, crc_warn, crc_alarm;
  logic                          crc_mismatch;
  logic [N_SLOTS-1:0][CNT_W-1:0] crc_cnt;

  crc_voting_circuit #(.N(N_SLOTS), .CW(CRC_W), .CNT_W(CNT_W),
                       .WARN_TH(WARN_TH), .ALARM_TH(ALARM_TH)) u_crc_vote (
    .clk         (clk),
    .rst_n       (rst_n),
    .check       (beat && is_mcrc),
    .part        (slot_active),
    .crc         (slot_crc),
    .clear       (slot_clear),
    .right_crc   (majority_crc),
    .right_found (majority_crc_ok),
    .agree       (crc_agree),
    .mismatch    (crc_mismatch),
    .err         (crc_err),
    .err_count   (crc_cnt),
    .warning     (crc_warn),
    .trojan_alarm(crc_alarm)
  );

  // ------------------------------------------------- output voting (MV, MRVO)
  logic [W-1:0]                  safe_out;
  logic                          safe_valid, mv_mismatch;
  logic [N_SLOTS-1:0]            mv_agree, mv_err, mv_warn, mv_alarm;
  logic [N_SLOTS-1:0][CNT_W-1:0] mv_cnt;

  mv_trojan_detector #(.N(N_SLOTS), .W(W), .CNT_W(CNT_W),
                       .WARN_TH(WARN_TH), .ALARM_TH(ALARM_TH)) u_mv (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (beat && is_mv),
    .part        (slot_active),
    .ip_out      (slot_out),
    .clear       (slot_clear),
    .safe_out    (safe_out),
    .safe_valid  (safe_valid),
    .mismatch    (mv_mismatch),
    .agree       (mv_agree),
    .err         (mv_err),
    .err_count   (mv_cnt),
    .warning     (mv_warn),
    .trojan_alarm(mv_alarm)
  );

  // ------------------------------------------- random selection (MRVO, MCRC)
  logic [15:0]        rnd;
  logic [SID_W-1:0]   sel;
  logic               sel_ok;
  logic [W-1:0]       sel_out;
  logic [N_SLOTS-1:0] w_agree;
  logic               w_update;

  lfsr_rng u_rng (.clk(clk), .rst_n(rst_n), .step(beat), .rnd(rnd));

  // MRVO learns from comparing outputs, MCRC from the CRC vote.
  assign w_agree  = is_mcrc ? crc_agree : mv_agree;
  assign w_update = beat && (is_mrvo || is_mcrc) && (w_agree != '0);

  weight_tracker #(.N(N_SLOTS), .WW(WEIGHT_W)) u_weights (
    .clk       (clk),
    .rst_n     (rst_n),
    .update    (w_update),
    .part      (slot_active),
    .agree     (w_agree),
    .reset_slot(slot_clear),
    .load      (cert_load),
    .load_weight(cert_weight),
    .weight    (weight)
  );

  output_selector #(.N(N_SLOTS), .W(W), .WW(WEIGHT_W)) u_sel (
    .biased  (biased),
    .rnd     (rnd),
    .eligible(slot_active),
    .weight  (weight),
    .ip_out  (slot_out),
    .sel     (sel),
    .sel_ok  (sel_ok),
    .dout    (sel_out)
  );

  // -------------------------------------------------------- system output
  logic [W-1:0]     mux_out;
  logic             mux_valid;
  logic [SID_W-1:0] mux_slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mux_out   <= '0;
      mux_valid <= 1'b0;
      mux_slot  <= '0;
    end else begin
      mux_valid <= 1'b0;
      if (beat) begin
        if (is_mrvo || is_mcrc) begin
          mux_out   <= sel_out;
          mux_valid <= sel_ok;
          mux_slot  <= sel;
        end else if (!is_mv) begin
          mux_out   <= slot_out[0];
          mux_valid <= slot_active[0];
          mux_slot  <= '0;
        end
      end
    end
  end

  assign out_data  = is_mv ? safe_out   : mux_out;
  assign out_valid = is_mv ? safe_valid : mux_valid;
  assign out_slot  = mux_slot;

  // ------------------------------------------------------ simple blockage
  logic [W-1:0] obf_out, deobf_in;
  sb_obfuscate   #(.W(W)) u_f    (.din(out_data), .dout(obf_out));
  sb_deobfuscate #(.W(W)) u_finv (.din(link_in),  .dout(deobf_in));
  assign link_out = obf_en ? obf_out  : out_data;
  assign rx_data  = obf_en ? deobf_in : link_in;

  // ------------------------------------------------------ alarms and PR
  assign mismatch     = is_mcrc ? (beat && crc_mismatch) : mv_mismatch;
  assign warning      = is_mcrc ? crc_warn  : mv_warn;
  assign trojan_alarm = is_mcrc ? crc_alarm : mv_alarm;
  assign err_count    = is_mcrc ? crc_cnt   : mv_cnt;

  pr_controller #(.N_SLOTS(N_SLOTS), .N_CORES(N_CORES), .PERIOD(ROT_PERIOD)) u_pr (
    .clk          (clk),
    .rst_n        (rst_n),
    .evict_en     (is_mcrc || is_mv),
    .rotate_en    (is_mrvo || is_mcrc),
    .rot_random   (rot_random),
    .rnd          (rnd),
    .alarm        (trojan_alarm),
    .pr_req       (pr_req),
    .pr_slot      (pr_slot),
    .pr_core      (pr_core),
    .pr_reason    (pr_reason),
    .pr_done      (pr_done),
    .slot_core    (slot_core),
    .slot_active  (slot_active),
    .slot_clear   (slot_clear),
    .core_infected(core_infected),
    .no_spare     (no_spare),
    .evict_event  (evict_event),
    .rotate_event (rotate_event)
  );

  // ------------------------------------------------------ CRC logger
  crc_logger #(.W_IN(W_IN), .W_OUT(W), .CW(CRC_W), .DEPTH(LOG_DEPTH)) u_log (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (log_en),
    .sample (beat),
    .ip_in  (in_data),
    .ip_out (slot_out[log_slot]),
    .rd_addr(log_rd_addr),
    .rd_data(log_rd_data),
    .wr_ptr (log_wr_ptr),
    .count  (log_count)
  );

  // ------------------------------------------------------ authority report
  ca_reporter #(.N_SLOTS(N_SLOTS), .N_CORES(N_CORES), .SCORE_W(CNT_W),
                .INFECT_TH(ALARM_TH), .PERIOD_T(CA_PERIOD)) u_ca (
    .clk         (clk),
    .rst_n       (rst_n),
    .err         (is_mcrc ? crc_err : mv_err),
    .slot_core   (slot_core),
    .report_valid(report_valid),
    .report_score(report_score),
    .report_class(report_class)
  );

endmodule
