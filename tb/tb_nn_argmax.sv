// tb_nn_argmax: random signed scores (narrow range so that ties occur) and
// wide ones; the expected index is the first maximum.
module tb_nn_argmax;
  logic signed [23:0] x [3];
  logic        [1:0]  idx;
  int checks = 0, failures = 0, ties = 0;

  nn_argmax #(.N(3), .IN_W(24), .IDX_W(2)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      automatic int best = 0;
      for (int c = 0; c < 3; c++)
        x[c] = (t % 2) ? 24'($urandom()) : 24'(int'($urandom_range(6)) - 3);
      for (int c = 1; c < 3; c++) if (int'(x[c]) > int'(x[best])) best = c;
      if (x[0] == x[1] || x[1] == x[2] || x[0] == x[2]) ties++;
      #1; checks++;
      if (int'(idx) != best) begin
        failures++;
        if (failures < 10) $display("mismatch %0d %0d %0d idx=%0d exp=%0d", x[0], x[1], x[2], idx, best);
      end
    end
    checks++; if (ties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
