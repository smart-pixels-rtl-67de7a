// tb_row_sum: random and extreme pixel values; the sum is recomputed here.
module tb_row_sum;
  logic [1:0] pix [16];
  logic [5:0] sum;
  int checks = 0, failures = 0;

  row_sum dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      automatic int exp = 0;
      for (int i = 0; i < 16; i++) begin
        pix[i] = (t == 0) ? 2'd3 : (t == 1) ? 2'd0 : 2'($urandom_range(3));
        exp += int'(pix[i]);
      end
      #1; checks++;
      if (int'(sum) != exp) begin
        failures++;
        if (failures < 10) $display("mismatch t=%0d sum=%0d exp=%0d", t, sum, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
