// tb_pixel_readout: checks capture, the 2-bit ADC value and the scan shift of
// one pixel's Data flip-flops against a model kept in the testbench.
module tb_pixel_readout;
  import smartpix_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [N_COMP-1:0] comp, data;
  logic readout_enable, scan_in, scan_out;
  logic [ADC_W-1:0] adc_val;
  logic [2:0] model;
  int checks = 0, failures = 0;

  pixel_readout dut (.*);

  always #12 clk = ~clk;   // 25 ns bunch-crossing period (24 here, integer steps)

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ones(logic [2:0] v);
    return int'(v[0]) + int'(v[1]) + int'(v[2]);
  endfunction

  initial begin
    comp = '0; readout_enable = 0; scan_in = 0;
    repeat (2) @(posedge clk);
    #1; checks++; if (data !== 3'b000) failures++;   // reset value
    rst_n = 1;
    model = '0;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      comp = 3'($urandom_range(7));
      readout_enable = ($urandom_range(2) == 0);
      scan_in = 1'($urandom_range(1));
      @(posedge clk);
      model = readout_enable ? {scan_in, model[2:1]} : comp;
      #1;
      checks++;
      if (data !== model || scan_out !== model[0] || int'(adc_val) != ones(model)) begin
        failures++;
        if (failures < 10) $display("mismatch t=%0d data=%b model=%b adc=%0d", t, data, model, adc_val);
      end
    end
    // capture takes exactly one edge: value appears after the first edge, not before
    @(negedge clk); readout_enable = 0; comp = 3'b011;
    @(negedge clk); comp = 3'b111;
    #1; checks++; if (data !== 3'b011 || adc_val != 2) failures++;
    @(posedge clk); #1; checks++; if (data !== 3'b111 || adc_val != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
