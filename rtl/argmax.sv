// argmax: picks the class with the highest score.
//
// Compares the N signed scores of the output layer and returns the index of
// the largest one and its value.  It is combinational.  On a tie the lowest
// index wins (a later score must be strictly greater to take over); the
// published results do not show a tie, so that rule is this design's own.
// The class index is what the core sends on its class stream.
module argmax #(
  parameter int N = 3,
  parameter int W = 32
) (
  input  logic [N-1:0][W-1:0]        scores,
  output logic [$clog2(N)-1:0]       idx,
  output logic [W-1:0]               max_val
);

  always_comb begin
    idx     = '0;
    max_val = scores[0];
    for (int i = 1; i < N; i++) begin
      if ($signed(scores[i]) > $signed(max_val)) begin
        idx     = ($clog2(N))'(i);
        max_val = scores[i];
      end
    end
  end

endmodule
