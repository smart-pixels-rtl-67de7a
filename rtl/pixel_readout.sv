// pixel_readout: digital part of one pixel.
//
// Three flip-flops Data[2:0] take the outputs of comparators [2:0] on the
// rising edge of the bunch-crossing clock. The same flip-flops form a segment
// of the matrix readout scan chain: Readout_scan_In from the previous pixel
// enters Data[2], Data[2] feeds Data[1], Data[1] feeds Data[0], and Data[0]
// drives Readout_scan_out to the next pixel. The flip-flop names, the
// comparator-to-flip-flop pairing and the chain order follow the pixel
// schematic. Readout_enable selects between the two uses; its polarity
// (1 = shift) is this design's choice.
//
// The pixel also presents its 2-bit ADC value to the row summation of the
// classifier. A thermometer code has as many ones as the value it encodes, so
// the value is the number of set Data bits (0..3); counting ones rather than
// decoding the thermometer pattern is this design's choice and also tolerates
// a bubble in the code.
//
// Timing: one clock edge from comparator output to Data and to adc_val.
// Reset (asynchronous, active low, own choice) clears Data.
module pixel_readout
  import smartpix_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_COMP-1:0] comp,          // comparator outputs
  input  logic              readout_enable,// 1: shift the scan chain, 0: capture
  input  logic              scan_in,       // Readout_scan_In_previous_pixel
  output logic              scan_out,      // Readout_scan_out_next_pixel
  output logic [N_COMP-1:0] data,          // Data[2:0]
  output logic [ADC_W-1:0]  adc_val        // 2-bit ADC value
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      data <= '0;
    else if (readout_enable)
      data <= {scan_in, data[N_COMP-1:1]};
    else
      data <= comp;
  end

  assign scan_out = data[0];

  always_comb begin
    adc_val = '0;
    for (int i = 0; i < int'(N_COMP); i++)
      adc_val = adc_val + ADC_W'(data[i]);
  end

endmodule
