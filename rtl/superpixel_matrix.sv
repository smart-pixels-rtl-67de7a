// superpixel_matrix: one 256-pixel matrix of the second prototype together
// with its in-pixel classifier.
//
// Every pixel has an analog front end (pixel_afe, behavioural model) and its
// digital part (pixel_readout). On each rising clock edge with
// readout_enable low, every pixel captures its comparator outputs. The 2-bit
// values of the 16 pixels of each row are added by one row_sum per row, and the
// 16 row sums feed the combinational momentum_classifier, whose weights and
// biases sit in this matrix's nn_config_regs.
//
// Logical organisation: 16 rows of 16 pixels, as in the data-flow diagram of
// the classifier. (The layout draws each matrix as 8 x 32 pixels; the
// mapping of layout position to logical row is not given, so the logical
// 16 x 16 arrangement is used.)
//
// Readout scan chain (order is this design's choice): pixel (r, c) is link
// p = r*16 + c; scan_in enters pixel 0, each pixel's scan_out feeds the next,
// and the last pixel drives scan_out. 3 * 256 shifts bring out every Data bit,
// pixel 255 Data[0] first.
//
// Timing: hits are captured at one edge; cls/keep are valid after that edge
// once the combinational network settles. A weight load takes CFG_BITS clocks
// with cfg_shift high.
module superpixel_matrix
  import smartpix_pkg::*;
#(
  parameter int OFFSET_E = 0   // threshold offset applied to every pixel model
) (
  input  logic        clk,
  input  logic        rst_n,
  // analog side (behavioural)
  input  logic [15:0] q_in_e      [N_ROWS][N_COLS],
  input  logic        test_enable [N_ROWS][N_COLS],
  input  logic [15:0] q_test_e,
  input  logic [15:0] vth_e       [N_COMP],
  input  logic        az,
  // pixel readout chain
  input  logic        readout_enable,
  input  logic        scan_in,
  output logic        scan_out,
  // weight configuration chain
  input  logic        cfg_shift,
  input  logic        cfg_in,
  output logic        cfg_out,
  // classifier
  output logic [SUM_W-1:0] row_sums [N_ROWS],
  output pt_class_e   cls,
  output logic        keep
);

  logic [ADC_W-1:0] adc   [N_ROWS][N_COLS];
  logic             chain [N_PIX+1];

  assign chain[0] = scan_in;
  assign scan_out = chain[N_PIX];

  for (genvar r = 0; r < int'(N_ROWS); r++) begin : g_row
    for (genvar c = 0; c < int'(N_COLS); c++) begin : g_col
      logic [N_COMP-1:0] comp;
      logic [N_COMP-1:0] data;

      pixel_afe #(.OFFSET_E(OFFSET_E)) u_afe (
        .q_in_e     (q_in_e[r][c]),
        .test_enable(test_enable[r][c]),
        .q_test_e   (q_test_e),
        .vth_e      (vth_e),
        .az         (az),
        .comp       (comp)
      );

      pixel_readout u_pix (
        .clk           (clk),
        .rst_n         (rst_n),
        .comp          (comp),
        .readout_enable(readout_enable),
        .scan_in       (chain[r*N_COLS + c]),
        .scan_out      (chain[r*N_COLS + c + 1]),
        .data          (data),
        .adc_val       (adc[r][c])
      );
    end

    row_sum #(.N_IN(N_COLS), .IN_W(ADC_W), .OUT_W(SUM_W))
      u_sum (.pix(adc[r]), .sum(row_sums[r]));
  end

  logic signed [WB_W-1:0]   w1 [N_HIDDEN][N_ROWS];
  logic signed [WB_W-1:0]   b1 [N_HIDDEN];
  logic signed [WB_W-1:0]   w2 [N_CLASS][N_HIDDEN];
  logic signed [WB_W-1:0]   b2 [N_CLASS];
  logic signed [ACC2_W-1:0] score [N_CLASS];

  nn_config_regs u_cfg (
    .clk(clk), .rst_n(rst_n), .cfg_shift(cfg_shift), .cfg_in(cfg_in), .cfg_out(cfg_out),
    .w1(w1), .b1(b1), .w2(w2), .b2(b2)
  );

  momentum_classifier u_nn (
    .row_sum(row_sums), .w1(w1), .b1(b1), .w2(w2), .b2(b2),
    .score(score), .cls(cls), .keep(keep)
  );

endmodule
