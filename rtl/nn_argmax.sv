// nn_argmax: index of the largest of N signed class scores.
//
// Compares the scores in order and keeps the first maximum, so a tie goes to
// the lower index (this design's choice). With three classes the index is the
// 2-bit classifier output. Purely combinational. An immediate assertion
// checks that the index never leaves the range of scores.
module nn_argmax #(
  parameter int unsigned N     = 3,   // scores
  parameter int unsigned IN_W  = 24,  // bits of a signed score
  parameter int unsigned IDX_W = 2    // bits of the index
) (
  input  logic signed [IN_W-1:0] x [N],
  output logic        [IDX_W-1:0] idx
);

  always_comb begin
    logic signed [IN_W-1:0] best;
    best = x[0];
    idx  = '0;
    for (int n = 1; n < int'(N); n++)
      if (x[n] > best) begin
        best = x[n];
        idx  = IDX_W'(n);
      end
  end

  // the index always names one of the N scores
  always_comb
    assert (int'(idx) < int'(N)) else $error("argmax index %0d out of range", idx);

endmodule
