// smartpix_roic2: digital top of the second smart-pixel readout chip.
//
// The chip holds two 256-pixel matrices that differ only in their analog front
// end (single-ended and differential preamplifier); each has its own pixel
// readout chain and its own in-pixel momentum classifier. Both matrices run
// from the same 40 MHz bunch-crossing clock, comparator reset and thresholds
// inputs per matrix. Their weight configuration chains are daisy-chained
// (this design's choice): cfg_in enters matrix 0, matrix 0's Config Out feeds
// matrix 1, and matrix 1's Config Out is cfg_out, so one load of
// 2 * 4652 bits programs both networks, matrix 1's bits first.
//
// Per matrix m: q_in_e[m] (pixel charges), test_enable[m], vth_e[m],
// scan_in[m]/scan_out[m] (pixel readout chain), row_sums[m], cls[m] and keep[m]
// (classifier output: keep for a high-momentum cluster, otherwise reject).
// The analog front ends are behavioural models; the matrix variants are
// therefore modelled identically here, except for an optional threshold offset
// per variant.
module smartpix_roic2
  import smartpix_pkg::*;
#(
  parameter int unsigned N_MATRIX = 2   // matrix variants on the chip
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] q_in_e      [N_MATRIX][N_ROWS][N_COLS],
  input  logic        test_enable [N_MATRIX][N_ROWS][N_COLS],
  input  logic [15:0] q_test_e,
  input  logic [15:0] vth_e       [N_MATRIX][N_COMP],
  input  logic        az,
  input  logic        readout_enable,
  input  logic        scan_in     [N_MATRIX],
  output logic        scan_out    [N_MATRIX],
  input  logic        cfg_shift,
  input  logic        cfg_in,
  output logic        cfg_out,
  output logic [SUM_W-1:0] row_sums [N_MATRIX][N_ROWS],
  output pt_class_e   cls         [N_MATRIX],
  output logic        keep        [N_MATRIX]
);

  logic cfg_link [N_MATRIX+1];

  assign cfg_link[0] = cfg_in;
  assign cfg_out     = cfg_link[N_MATRIX];

  for (genvar m = 0; m < int'(N_MATRIX); m++) begin : g_mat
    superpixel_matrix u_mat (
      .clk           (clk),
      .rst_n         (rst_n),
      .q_in_e        (q_in_e[m]),
      .test_enable   (test_enable[m]),
      .q_test_e      (q_test_e),
      .vth_e         (vth_e[m]),
      .az            (az),
      .readout_enable(readout_enable),
      .scan_in       (scan_in[m]),
      .scan_out      (scan_out[m]),
      .cfg_shift     (cfg_shift),
      .cfg_in        (cfg_link[m]),
      .cfg_out       (cfg_link[m+1]),
      .row_sums      (row_sums[m]),
      .cls           (cls[m]),
      .keep          (keep[m])
    );
  end

endmodule
