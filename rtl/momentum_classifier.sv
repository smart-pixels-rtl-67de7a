// momentum_classifier: the in-pixel neural network.
//
// A fully connected two-layer network reads the 16 row sums of the pixel
// cluster and sorts the cluster into one of three classes: a high transverse
// momentum track (kept for further processing) or a low-momentum track of
// positive or negative charge (rejected). The chain is the one in the
// data-flow diagram: Dense 16x58 -> ReLU 58 -> Dense 58x3 -> Argmax 3x1, with
// a 2-bit class output. Weights and biases come from nn_config_regs.
//
// The whole network is combinational logic with no clock, so its result
// follows the row sums after the logic settles; in the chip it settles within
// the bunch crossing in which the pixel flip-flops captured the hits. Integer
// arithmetic is exact throughout (see smartpix_pkg for the widths); the
// fractional scaling of the trained network is not given and is left to the
// weights.
//
// keep is high for the high-momentum class.
module momentum_classifier
  import smartpix_pkg::*;
(
  input  logic        [SUM_W-1:0]  row_sum [N_ROWS],
  input  logic signed [WB_W-1:0]   w1 [N_HIDDEN][N_ROWS],
  input  logic signed [WB_W-1:0]   b1 [N_HIDDEN],
  input  logic signed [WB_W-1:0]   w2 [N_CLASS][N_HIDDEN],
  input  logic signed [WB_W-1:0]   b2 [N_CLASS],
  output logic signed [ACC2_W-1:0] score [N_CLASS],
  output pt_class_e                cls,
  output logic                     keep
);

  logic signed [ACC1_W-1:0] pre_act [N_HIDDEN];
  logic        [HID_W-1:0]  hidden  [N_HIDDEN];
  logic        [CLASS_W-1:0] idx;

  nn_dense #(.N_IN(N_ROWS), .N_OUT(N_HIDDEN), .IN_W(SUM_W), .W_W(WB_W), .ACC_W(ACC1_W))
    u_dense1 (.x(row_sum), .w(w1), .b(b1), .y(pre_act));

  nn_relu #(.N(N_HIDDEN), .IN_W(ACC1_W))
    u_relu (.x(pre_act), .y(hidden));

  nn_dense #(.N_IN(N_HIDDEN), .N_OUT(N_CLASS), .IN_W(HID_W), .W_W(WB_W), .ACC_W(ACC2_W))
    u_dense2 (.x(hidden), .w(w2), .b(b2), .y(score));

  nn_argmax #(.N(N_CLASS), .IN_W(ACC2_W), .IDX_W(CLASS_W))
    u_argmax (.x(score), .idx(idx));

  assign cls  = pt_class_e'(idx);
  assign keep = (cls == CLS_HIGH);

endmodule
