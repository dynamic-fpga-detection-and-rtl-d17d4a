// crc_calc: CRC of one data word, the "compute CRC" block.
//
// Computes the CRC of the W-bit word 'data' with the truncated polynomial
// POLY (default x^5 + x^2 + 1, as used on each 8 bits of the UART outputs).
// The word is shifted in MSB first into a register that starts at zero, so
// 'crc' is the remainder of data(x) * x^CW divided by the generator. For
// W = 8 this is exactly the per-byte CRC; for wider words it is the CRC of the
// bytes taken one after another. The zero start value and bit order are this
// design's choice; the paper gives only the polynomial.
//
// Purely combinational.
module crc_calc #(
  parameter int unsigned W    = 8,
  parameter int unsigned CW   = 5,
  parameter logic [CW-1:0] POLY = CW'(5'b00101)
) (
  input  logic [W-1:0]  data,
  output logic [CW-1:0] crc
);

  always_comb begin
    crc = '0;
    for (int i = int'(W) - 1; i >= 0; i--) begin
      if (crc[CW-1] ^ data[i]) crc = (crc << 1) ^ POLY;
      else                     crc = crc << 1;
    end
  end

endmodule
