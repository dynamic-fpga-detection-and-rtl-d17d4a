// weight_tracker: learns a weight per IP for biased random selection.
//
// Each of the N running IPs has a WW-bit weight. All weights start at half of
// the range (2^(WW-1)). In each cycle where 'update' is high the outputs of the
// IPs have been compared: an IP in 'agree' (its output matched the others)
// gains one, every other participating IP (in 'part' but not in 'agree') loses
// one. Weights saturate at 0 and 2^WW-1. This is the rule the paper reports
// for its 8-bit weights. An IP whose slot is reloaded with a new core
// ('reset_slot') returns to the starting weight; that reset is this design's
// choice, as the paper does not say what a new core's weight is.
// The paper also allows weights to come from a core's certificate: 'load'
// sets a slot's weight to 'load_weight', ahead of any other update.
//
// Timing: weights change on the clock edge after the update cycle.
module weight_tracker #(
  parameter int unsigned N  = 3,
  parameter int unsigned WW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 update,
  input  logic [N-1:0]         part,
  input  logic [N-1:0]         agree,
  input  logic [N-1:0]         reset_slot,
  input  logic [N-1:0]         load,
  input  logic [N-1:0][WW-1:0] load_weight,
  output logic [N-1:0][WW-1:0] weight
);

  localparam logic [WW-1:0] W_INIT = WW'(1) << (WW - 1);
  localparam logic [WW-1:0] W_MAX  = '1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) weight[i] <= W_INIT;
    end else begin
      for (int i = 0; i < int'(N); i++) begin
        if (load[i]) begin
          weight[i] <= load_weight[i];
        end else if (reset_slot[i]) begin
          weight[i] <= W_INIT;
        end else if (update && part[i]) begin
          if (agree[i]) begin
            if (weight[i] != W_MAX) weight[i] <= weight[i] + 1'b1;
          end else begin
            if (weight[i] != '0)    weight[i] <= weight[i] - 1'b1;
          end
        end
      end
    end
  end

endmodule
