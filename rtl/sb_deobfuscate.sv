// sb_deobfuscate: the inverse confusion function f^-1 of simple blockage.
//
// Sits at the input of the trusted receiver and undoes sb_obfuscate. For odd W
// the swap of the last bit with bit 0 is undone first. Then, for each pair with
// low bit B and high bit C, the low output bit is A = B op C and the high
// output bit is B (B moves back). The operation is XOR for even pairs and XNOR
// for odd pairs, the same as in f, since A ^ B = C gives A = B ^ C and
// ~(A ^ B) = C gives A = ~(B ^ C). This follows the paper's inverse figure.
//
// Purely combinational, no clock.
module sb_deobfuscate #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  localparam int unsigned NPAIR = W / 2;

  logic [W-1:0] unswapped;

  always_comb begin
    unswapped = din;
    if ((W % 2 == 1) && (W > 1)) begin
      unswapped[W-1] = din[0];
      unswapped[0]   = din[W-1];
    end
    dout = unswapped;
    for (int unsigned k = 0; k < NPAIR; k++) begin
      dout[2*k]   = (k % 2 == 0) ? (unswapped[2*k] ^ unswapped[2*k+1])
                                 : ~(unswapped[2*k] ^ unswapped[2*k+1]);
      dout[2*k+1] = unswapped[2*k];
    end
  end

endmodule
