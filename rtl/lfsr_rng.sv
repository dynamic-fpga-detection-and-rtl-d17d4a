// lfsr_rng: pseudo-random source for the output selection of the variants.
//
// A 16-bit Galois LFSR with the maximal-length polynomial
// x^16 + x^14 + x^13 + x^11 + 1 (period 65535). It advances by one step in
// each cycle where 'step' is high; 'rnd' is the current state. The paper asks
// only for an unbiased random variable generator; the LFSR, its polynomial and
// the seed are this design's choice. The seed must be non-zero.
//
// Timing: rnd changes on the clock edge after a cycle with step high.
module lfsr_rng #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  output logic [15:0] rnd
);

  localparam logic [15:0] TAPS = 16'hB400;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      rnd <= SEED;
    else if (step)   rnd <= (rnd >> 1) ^ (rnd[0] ? TAPS : 16'h0000);
  end

endmodule
