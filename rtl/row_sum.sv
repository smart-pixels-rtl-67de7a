// row_sum: the summation node of one pixel row.
//
// Adds the 2-bit ADC values of the N_IN pixels of a row into one row sum, the
// per-row input of the classifier. With 16 pixels of at most 3 the sum is at
// most 48 and fits the 6 bits of the data-flow diagram. The adder is purely
// combinational, like the rest of the classifier, so no clock reaches it.
module row_sum #(
  parameter int unsigned N_IN  = 16,  // pixels per row
  parameter int unsigned IN_W  = 2,   // bits per pixel value
  parameter int unsigned OUT_W = 6    // bits of the sum
) (
  input  logic [IN_W-1:0]  pix [N_IN],
  output logic [OUT_W-1:0] sum
);

  always_comb begin
    sum = '0;
    for (int i = 0; i < int'(N_IN); i++)
      sum = sum + OUT_W'(pix[i]);
  end

endmodule
