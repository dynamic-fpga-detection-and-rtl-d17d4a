// sb_obfuscate: the confusion function f of simple blockage (SB).
//
// An untrusted IP's output passes through f before it leaves the IP's region,
// so a Trojan that leaks plain data over the output lines sends scrambled bits.
// The word is cut into 2-bit pairs. For a pair whose low bit is A and high bit
// is B, the low output bit is B (B moves into A's place) and the high output
// bit is C = A op B. The operation alternates from pair to pair: XOR for pair
// 0, XNOR for pair 1, XOR for pair 2, and so on. This follows the paper's
// sample function and its figure. When W is odd the last bit has no partner;
// the paper only says it "can be permuted with one of the other bits", and
// this design swaps it with bit 0 after the pair step.
//
// Purely combinational, no clock. Its inverse is sb_deobfuscate.
module sb_obfuscate #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  localparam int unsigned NPAIR = W / 2;

  logic [W-1:0] paired;

  always_comb begin
    paired = din;
    for (int unsigned k = 0; k < NPAIR; k++) begin
      paired[2*k]   = din[2*k+1];
      paired[2*k+1] = (k % 2 == 0) ? (din[2*k] ^ din[2*k+1])
                                   : ~(din[2*k] ^ din[2*k+1]);
    end
    dout = paired;
    if ((W % 2 == 1) && (W > 1)) begin
      dout[W-1] = paired[0];
      dout[0]   = paired[W-1];
    end
  end

endmodule
