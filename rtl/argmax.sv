// argmax -- index of the largest of N signed scores.
//
// Replaces the softmax of the trained network: the class with the highest score
// is the answer, and no probabilities are computed. On a tie the lowest index
// wins, which matches the usual software argmax; the tie rule is this design's
// choice. Combinational, a linear chain of N-1 comparisons.
module argmax #(
  parameter int unsigned N     = 3,
  parameter int unsigned W     = 19,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [W-1:0]     score [N],
  output logic        [IDX_W-1:0] idx
);

  always_comb begin
    logic signed [W-1:0] best;
    best = score[0];
    idx  = '0;
    for (int k = 1; k < N; k++) begin
      if (score[k] > best) begin
        best = score[k];
        idx  = IDX_W'(k);
      end
    end
  end

endmodule
