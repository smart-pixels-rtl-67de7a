// nn_config_regs: the reconfigurable weight and bias storage of the classifier.
//
// All weights and biases are held in one shift register of CFG_BITS flip-flops
// (4652 at the default sizes: w1 3712, b1 232, w2 696 and b2 12 bits, the
// counts printed in the data-flow diagram). While cfg_shift is high, each
// clock edge moves the register one place: cfg_in enters at the top, the
// lowest bit leaves on cfg_out, so several chips or matrices can be
// daisy-chained from Config In to Config Out. A complete load therefore takes
// CFG_BITS clocks and the first bit sent ends in bit 0.
//
// Field layout of the register (this design's choice; the diagram only names
// the four fields and their sizes), each entry WB_W bits, LSB first:
//   w1[h][r] at  (h*N_IN  + r) * WB_W                      h < N_HID, r < N_IN
//   b1[h]    at  W1_BITS + h * WB_W
//   w2[c][h] at  W1_BITS + B1_BITS + (c*N_HID + h) * WB_W   c < N_OUT
//   b2[c]    at  W1_BITS + B1_BITS + W2_BITS + c * WB_W
// Every entry is a signed two's-complement integer. Reset (asynchronous,
// active low) clears all weights and biases; holding cfg_shift low keeps them.
module nn_config_regs
  import smartpix_pkg::*;
#(
  parameter int unsigned N_IN  = N_ROWS,
  parameter int unsigned N_HID = N_HIDDEN,
  parameter int unsigned N_OUT = N_CLASS,
  parameter int unsigned W     = WB_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_shift,
  input  logic                cfg_in,
  output logic                cfg_out,
  output logic signed [W-1:0] w1 [N_HID][N_IN],
  output logic signed [W-1:0] b1 [N_HID],
  output logic signed [W-1:0] w2 [N_OUT][N_HID],
  output logic signed [W-1:0] b2 [N_OUT]
);

  localparam int unsigned L_W1  = N_HID * N_IN * W;
  localparam int unsigned L_B1  = N_HID * W;
  localparam int unsigned L_W2  = N_OUT * N_HID * W;
  localparam int unsigned L_B2  = N_OUT * W;
  localparam int unsigned L_ALL = L_W1 + L_B1 + L_W2 + L_B2;

  logic [L_ALL-1:0] cfg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      cfg <= '0;
    else if (cfg_shift)
      cfg <= {cfg_in, cfg[L_ALL-1:1]};
  end

  assign cfg_out = cfg[0];

  for (genvar h = 0; h < int'(N_HID); h++) begin : g_hid
    for (genvar r = 0; r < int'(N_IN); r++) begin : g_w1
      assign w1[h][r] = cfg[(h*N_IN + r)*W +: W];
    end
    assign b1[h] = cfg[L_W1 + h*W +: W];
  end

  for (genvar c = 0; c < int'(N_OUT); c++) begin : g_out
    for (genvar h = 0; h < int'(N_HID); h++) begin : g_w2
      assign w2[c][h] = cfg[L_W1 + L_B1 + (c*N_HID + h)*W +: W];
    end
    assign b2[c] = cfg[L_W1 + L_B1 + L_W2 + c*W +: W];
  end

endmodule
