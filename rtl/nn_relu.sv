// nn_relu: rectified linear unit on every hidden neuron.
//
// y[n] = max(0, x[n]). Negative sums become zero, positive sums pass
// unchanged; the result is unsigned and one bit narrower than the signed
// input since its sign bit is always zero. No requantisation is applied.
// Purely combinational.
module nn_relu #(
  parameter int unsigned N    = 58,  // neurons
  parameter int unsigned IN_W = 15   // bits of the signed input
) (
  input  logic signed [IN_W-1:0] x [N],
  output logic        [IN_W-2:0] y [N]
);

  always_comb
    for (int n = 0; n < int'(N); n++)
      y[n] = x[n][IN_W-1] ? '0 : x[n][IN_W-2:0];

endmodule
