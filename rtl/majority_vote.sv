// majority_vote: majority circuit over N words.
//
// Among the participating inputs ('part', the slots that hold a running core),
// a word is the majority when more than half of the participants carry it.
// 'maj_found' tells whether such a word exists, 'maj' is that word, 'agree'
// marks the participants that carry it and 'mismatch' is high when any two
// participants differ. With three participants this is the usual two-of-three
// vote. When no word has a majority (all three differ), 'maj' is the first
// participant's word and no input is marked as agreeing; the paper does not
// say what happens then, and the callers count no errors in that case.
//
// Purely combinational; O(N^2) word comparators.
module majority_vote #(
  parameter int unsigned N = 3,
  parameter int unsigned W = 8
) (
  input  logic [N-1:0][W-1:0] din,
  input  logic [N-1:0]        part,
  output logic [W-1:0]        maj,
  output logic                maj_found,
  output logic [N-1:0]        agree,
  output logic                mismatch
);

  localparam int unsigned CNT_W = $clog2(N + 1) + 1;

  logic [CNT_W-1:0] n_part;
  logic [CNT_W-1:0] n_same;
  logic             first_set;

  always_comb begin
    n_part = '0;
    for (int i = 0; i < int'(N); i++) n_part = n_part + CNT_W'(part[i]);

    maj       = '0;
    maj_found = 1'b0;
    mismatch  = 1'b0;
    first_set = 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      if (part[i]) begin
        if (!first_set) begin
          maj       = din[i];
          first_set = 1'b1;
        end else if (din[i] != maj) begin
          mismatch = 1'b1;
        end
      end
    end

    for (int i = 0; i < int'(N); i++) begin
      n_same = '0;
      for (int j = 0; j < int'(N); j++) begin
        if (part[j] && (din[j] == din[i])) n_same = n_same + 1'b1;
      end
      if (part[i] && !maj_found && ({n_same, 1'b0} > {1'b0, n_part})) begin
        maj       = din[i];
        maj_found = 1'b1;
      end
    end

    for (int i = 0; i < int'(N); i++) begin
      agree[i] = maj_found && part[i] && (din[i] == maj);
    end
  end

endmodule
