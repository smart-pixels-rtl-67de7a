// tb_nn_relu: random signed sums including zero and both extremes; the
// expected output is max(0, x).
module tb_nn_relu;
  localparam int N = 58;
  logic signed [14:0] x [N];
  logic        [13:0] y [N];
  int checks = 0, failures = 0;

  nn_relu #(.N(N), .IN_W(15)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int n = 0; n < N; n++)
        x[n] = (n == 0) ? 15'sd0 : (n == 1) ? -15'sd16384 : (n == 2) ? 15'sd16383 : (n == 3) ? -15'sd1 : 15'($urandom());
      #1;
      for (int n = 0; n < N; n++) begin
        automatic int exp = (int'(x[n]) < 0) ? 0 : int'(x[n]);
        checks++;
        if (int'(y[n]) != exp) begin
          failures++;
          if (failures < 10) $display("mismatch n=%0d x=%0d y=%0d", n, x[n], y[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
