// argmax: class decision of the MLP classifier.
//
// Returns the index of the largest of N signed scores. The scores are
// compared one after another along a chain of comparators and multiplexers;
// a later score replaces the current best only if it is strictly greater,
// so a tie goes to the lowest index.
//
// Interface: scores (N x W, each signed) in, idx (clog2(N) bits) out.
// Purely combinational.
//
// This stage is this design's own: the classifier's output layer must be
// turned into a class, but its circuit is not described. The chain form and
// the tie rule are choices made here.
module argmax #(
  parameter int N     = 10,
  parameter int W     = 20,
  parameter int IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][W-1:0] scores,
  output logic [IDX_W-1:0]    idx
);

  logic signed [W-1:0] best;

  always_comb begin
    best = $signed(scores[0]);
    idx  = '0;
    for (int i = 1; i < N; i++) begin
      if ($signed(scores[i]) > best) begin
        best = $signed(scores[i]);
        idx  = IDX_W'(i);
      end
    end
  end

endmodule
