// smartpix_pkg: constants and types shared by the smart-pixel readout chip.
//
// The sizes follow the data-flow diagram of the in-pixel classifier: a 16 x 16
// cluster of pixels, a 2-bit flash ADC per pixel, one 6-bit sum per pixel row,
// a 16 -> 58 -> 3 fully connected network with 4-bit weights and biases
// (3712 / 232 / 696 / 12 configuration bits) and a 2-bit argmax output.
// The 4-bit width is what those bit counts divide out to; the signed
// two's-complement integer interpretation is this design's choice.
package smartpix_pkg;

  localparam int unsigned N_ROWS     = 16;  // pixel rows per cluster
  localparam int unsigned N_COLS     = 16;  // pixels per row
  localparam int unsigned N_PIX      = N_ROWS * N_COLS;
  localparam int unsigned N_COMP     = 3;   // comparators per pixel (thermometer)
  localparam int unsigned ADC_W      = 2;   // bits of the flash ADC value
  localparam int unsigned SUM_W      = 6;   // bits of one row sum
  localparam int unsigned N_HIDDEN   = 58;  // hidden neurons
  localparam int unsigned N_CLASS    = 3;   // output classes
  localparam int unsigned WB_W       = 4;   // bits per weight and per bias
  localparam int unsigned CLASS_W    = 2;   // bits of the argmax output

  // Accumulator widths (own choice: wide enough that no sum can overflow).
  // Layer 1: 16 * 8 * 48 + 8 < 2^14, signed -> 15 bits.
  localparam int unsigned ACC1_W     = 15;
  // Hidden activation after ReLU, kept exact (no requantisation).
  localparam int unsigned HID_W      = ACC1_W - 1;
  // Layer 2: 58 * 8 * (2^14 - 1) + 8 < 2^23, signed -> 24 bits.
  localparam int unsigned ACC2_W     = 24;

  // Configuration bit counts, as printed in the data-flow diagram.
  localparam int unsigned W1_BITS    = N_ROWS * N_HIDDEN * WB_W;   // 3712
  localparam int unsigned B1_BITS    = N_HIDDEN * WB_W;            // 232
  localparam int unsigned W2_BITS    = N_HIDDEN * N_CLASS * WB_W;  // 696
  localparam int unsigned B2_BITS    = N_CLASS * WB_W;             // 12
  localparam int unsigned CFG_BITS   = W1_BITS + B1_BITS + W2_BITS + B2_BITS; // 4652

  // Output classes. The order is the top-to-bottom order of the diagram's
  // outputs; the numeric code of each class is this design's choice.
  typedef enum logic [CLASS_W-1:0] {
    CLS_POS_LOW = 2'd0,  // positive particle, low pT  -> reject
    CLS_NEG_LOW = 2'd1,  // negative particle, low pT  -> reject
    CLS_HIGH    = 2'd2   // high pT                    -> keep for further processing
  } pt_class_e;

endpackage
