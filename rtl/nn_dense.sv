// nn_dense: one fully connected layer, fully parallel and combinational.
//
// y[o] = b[o] + sum over i of w[o][i] * x[i], for every output o at once.
// The inputs x are unsigned (row sums or ReLU outputs), weights and biases are
// signed two's-complement integers, and the result is a signed sum of ACC_W
// bits, chosen wide enough that it cannot overflow. The bias is added at the
// least significant bit of the sum, as an integer. The classifier uses this
// module twice: 16 -> 58 and 58 -> 3. A layer is one multiplier per weight and
// an adder tree per output, with no registers, as in the chip's
// combinational network.
module nn_dense #(
  parameter int unsigned N_IN  = 16,  // inputs
  parameter int unsigned N_OUT = 58,  // outputs (neurons)
  parameter int unsigned IN_W  = 6,   // bits of an unsigned input
  parameter int unsigned W_W   = 4,   // bits of a signed weight or bias
  parameter int unsigned ACC_W = 15   // bits of the signed output
) (
  input  logic        [IN_W-1:0]  x [N_IN],
  input  logic signed [W_W-1:0]   w [N_OUT][N_IN],
  input  logic signed [W_W-1:0]   b [N_OUT],
  output logic signed [ACC_W-1:0] y [N_OUT]
);

  always_comb begin
    for (int o = 0; o < int'(N_OUT); o++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'(b[o]);
      for (int i = 0; i < int'(N_IN); i++)
        acc = acc + ACC_W'(signed'({1'b0, x[i]}) * w[o][i]);
      y[o] = acc;
    end
  end

endmodule
