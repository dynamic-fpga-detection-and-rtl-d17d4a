// output_selector: the multiplexer of multiplexing reconfigurable variants'
// outputs (MRVO), also used by the CRC scheme (MCRC).
//
// It chooses which of the N running IPs drives the system output in this
// cycle. 'eligible' marks the slots that hold a running core. From a 16-bit
// random number 'rnd':
//   unbiased (biased = 0): every eligible slot is equally likely. With E
//     eligible slots, k = (rnd * E) >> 16 picks the k-th eligible slot.
//   biased (biased = 1): a slot is picked with probability proportional to its
//     weight. With S the sum of the eligible weights, t = (rnd * S) >> 16 and
//     the first slot whose running sum of weights exceeds t is picked. If all
//     eligible weights are zero the unbiased rule is used.
// The paper gives the two criteria (equal probability, weights inversely
// related to the chance of infection); the scaling of the random number to a
// slot is this design's choice. 'sel_ok' is low when no slot is eligible.
//
// Purely combinational; the caller registers 'dout'.
module output_selector #(
  parameter int unsigned N  = 3,
  parameter int unsigned W  = 8,
  parameter int unsigned WW = 8,
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 biased,
  input  logic [15:0]          rnd,
  input  logic [N-1:0]         eligible,
  input  logic [N-1:0][WW-1:0] weight,
  input  logic [N-1:0][W-1:0]  ip_out,
  output logic [SW-1:0]        sel,
  output logic                 sel_ok,
  output logic [W-1:0]         dout
);

  localparam int unsigned SUM_W = WW + SW + 1;
  localparam int unsigned CNT_W = SW + 1;

  logic [CNT_W-1:0]      n_elig;
  logic [SUM_W-1:0]      w_sum;
  logic [CNT_W-1:0]      k_pick;
  logic [SUM_W-1:0]      t_pick;
  logic [SUM_W-1:0]      run_sum;
  logic [CNT_W-1:0]      run_cnt;
  logic                  found;
  logic [16+SUM_W-1:0]   prod_w;
  logic [16+CNT_W-1:0]   prod_n;

  always_comb begin
    n_elig = '0;
    w_sum  = '0;
    for (int i = 0; i < int'(N); i++) begin
      if (eligible[i]) begin
        n_elig = n_elig + 1'b1;
        w_sum  = w_sum + SUM_W'(weight[i]);
      end
    end
    prod_n = {{CNT_W{1'b0}}, rnd} * {16'h0, n_elig};
    prod_w = {{SUM_W{1'b0}}, rnd} * {16'h0, w_sum};
    k_pick = prod_n[16 +: CNT_W];
    t_pick = prod_w[16 +: SUM_W];

    sel     = '0;
    found   = 1'b0;
    run_sum = '0;
    run_cnt = '0;
    for (int i = 0; i < int'(N); i++) begin
      if (eligible[i] && !found) begin
        if (biased && (w_sum != '0)) begin
          run_sum = run_sum + SUM_W'(weight[i]);
          if (run_sum > t_pick) begin
            sel   = SW'(i);
            found = 1'b1;
          end
        end else begin
          if (run_cnt == k_pick) begin
            sel   = SW'(i);
            found = 1'b1;
          end
          run_cnt = run_cnt + 1'b1;
        end
      end
    end
    sel_ok = found;
    dout   = ip_out[sel];
  end

endmodule
