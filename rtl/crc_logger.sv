// crc_logger: records CRCs of an untrusted IP's inputs and outputs.
//
// Attached beside a third-party IP, it taps the IP's input and output words.
// In each cycle where both 'en' and 'sample' are high it computes the CRC of
// the input word and of the output word (polynomial x^5 + x^2 + 1 by default)
// and writes the pair {input CRC, output CRC} into the next row of a DEPTH-row
// memory, wrapping around when full. The memory can be read through a
// synchronous read port and compared off-line with the IP's specification.
// The paper gives this function and the two-column table; per-word CRCs, the
// memory depth and the wrap-around are this design's choices.
//
// Timing: a sample is written on the clock edge of its cycle; rd_data is valid
// one cycle after rd_addr. 'count' saturates at DEPTH, 'wr_ptr' is the next
// row to be written.
module crc_logger #(
  parameter int unsigned W_IN  = 8,
  parameter int unsigned W_OUT = 8,
  parameter int unsigned CW    = 5,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic            sample,
  input  logic [W_IN-1:0] ip_in,
  input  logic [W_OUT-1:0] ip_out,
  input  logic [AW-1:0]   rd_addr,
  output logic [2*CW-1:0] rd_data,
  output logic [AW-1:0]   wr_ptr,
  output logic [AW:0]     count
);

  logic [CW-1:0]   in_crc, out_crc;
  logic [2*CW-1:0] mem [DEPTH];

  crc_calc #(.W(W_IN),  .CW(CW)) u_crc_in  (.data(ip_in),  .crc(in_crc));
  crc_calc #(.W(W_OUT), .CW(CW)) u_crc_out (.data(ip_out), .crc(out_crc));

  always_ff @(posedge clk) begin
    if (en && sample) mem[wr_ptr] <= {in_crc, out_crc};
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      count  <= '0;
    end else if (en && sample) begin
      wr_ptr <= (32'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (32'(count) != DEPTH) count <= count + 1'b1;
    end
  end

endmodule
