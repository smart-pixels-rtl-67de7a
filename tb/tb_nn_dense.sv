// tb_nn_dense: the 16 -> 58 layer at its sizes with random unsigned inputs and
// random signed 4-bit weights and biases, including the extreme values; every
// output is recomputed here with integer arithmetic.
module tb_nn_dense;
  localparam int NI = 16, NO = 58;
  logic        [5:0]  x [NI];
  logic signed [3:0]  w [NO][NI];
  logic signed [3:0]  b [NO];
  logic signed [14:0] y [NO];
  int checks = 0, failures = 0;

  nn_dense #(.N_IN(NI), .N_OUT(NO), .IN_W(6), .W_W(4), .ACC_W(15)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < NI; i++) x[i] = (t < 2) ? 6'd48 : 6'($urandom_range(48));
      for (int o = 0; o < NO; o++) begin
        b[o] = (t == 0) ? -4'sd8 : (t == 1) ? 4'sd7 : 4'($urandom_range(15));
        for (int i = 0; i < NI; i++)
          w[o][i] = (t == 0) ? -4'sd8 : (t == 1) ? 4'sd7 : 4'($urandom_range(15));
      end
      #1;
      for (int o = 0; o < NO; o++) begin
        automatic int exp = int'(b[o]);
        for (int i = 0; i < NI; i++) exp += int'(w[o][i]) * int'(x[i]);
        checks++;
        if (int'(y[o]) != exp) begin
          failures++;
          if (failures < 10) $display("mismatch t=%0d o=%0d y=%0d exp=%0d", t, o, y[o], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
