// trojan_pkg: types and constants shared by the runtime Trojan protection blocks.
//
// The CRC polynomial x^5 + x^2 + 1 and the 8-bit selection weights are the
// values the protection schemes were evaluated with. The scheme encoding, the
// core classes of the authority report and the reconfiguration reasons are
// this design's own encodings.
package trojan_pkg;

  // CRC: truncated polynomial x^5 + x^2 + 1 (the x^5 term is implicit).
  localparam int unsigned    CRC_W    = 5;
  localparam logic [4:0]     CRC_POLY = 5'b00101;

  // Width of each IP's weight in biased random selection.
  localparam int unsigned    WEIGHT_W = 8;

  // Which protection scheme drives the system output.
  //   SCH_SINGLE : one IP (slot 0) only, meant for simple blockage on its own
  //   SCH_MRVO   : random choice among the running variants, no detection
  //   SCH_MCRC   : random choice plus CRC voting, alarms evict cores
  //   SCH_MV     : majority vote of the variants, alarms evict cores
  typedef enum logic [1:0] {
    SCH_SINGLE = 2'd0,
    SCH_MRVO   = 2'd1,
    SCH_MCRC   = 2'd2,
    SCH_MV     = 2'd3
  } scheme_e;

  // Class of a core in the certificate-authority report.
  typedef enum logic [1:0] {
    CLS_SAFE     = 2'd0,
    CLS_BUGGY    = 2'd1,
    CLS_INFECTED = 2'd2
  } core_class_e;

  // Why a reconfigurable slot is being reloaded.
  typedef enum logic {
    PR_ROTATE = 1'b0,   // periodic replacement, old core goes back to the queue
    PR_EVICT  = 1'b1    // Trojan alarm, old core is marked infected
  } pr_reason_e;

endpackage
