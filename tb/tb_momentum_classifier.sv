// tb_momentum_classifier: random weights, biases and row sums, including the
// largest row sums; the three class scores, the class and keep are compared
// with the integer reference model of nn_ref_pkg. Every class must occur.
module tb_momentum_classifier;
  import smartpix_pkg::*;
  import nn_ref_pkg::*;

  logic        [SUM_W-1:0]  row_sum [N_ROWS];
  logic signed [WB_W-1:0]   w1 [N_HIDDEN][N_ROWS];
  logic signed [WB_W-1:0]   b1 [N_HIDDEN];
  logic signed [WB_W-1:0]   w2 [N_CLASS][N_HIDDEN];
  logic signed [WB_W-1:0]   b2 [N_CLASS];
  logic signed [ACC2_W-1:0] score [N_CLASS];
  pt_class_e                cls;
  logic                     keep;
  int checks = 0, failures = 0;
  int seen [3] = '{0, 0, 0};

  momentum_classifier dut (.*);

  vec_in_t rx; mat1_t rw1; vec_hid_t rb1; mat2_t rw2; vec_cls_t rb2, rs;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      for (int r = 0; r < NR; r++) begin
        rx[r] = (t == 0) ? 48 : int'($urandom_range(48));
        row_sum[r] = SUM_W'(rx[r]);
      end
      for (int j = 0; j < NH; j++) begin
        rb1[j] = (t == 0) ? 7 : rnd4();  b1[j] = WB_W'(rb1[j]);
        for (int r = 0; r < NR; r++) begin
          rw1[j][r] = (t == 0) ? 7 : rnd4(); w1[j][r] = WB_W'(rw1[j][r]);
        end
      end
      for (int c = 0; c < NC; c++) begin
        rb2[c] = rnd4(); b2[c] = WB_W'(rb2[c]);
        for (int j = 0; j < NH; j++) begin
          rw2[c][j] = (t == 0 && c == 0) ? -8 : rnd4(); w2[c][j] = WB_W'(rw2[c][j]);
        end
      end
      #1;
      ref_scores(rx, rw1, rb1, rw2, rb2, rs);
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (int'(score[c]) != rs[c]) begin
          failures++;
          if (failures < 10) $display("t=%0d score[%0d]=%0d exp=%0d", t, c, score[c], rs[c]);
        end
      end
      checks++;
      if (int'(cls) != ref_argmax(rs) || keep !== (ref_argmax(rs) == 2)) begin
        failures++;
        if (failures < 10) $display("t=%0d cls=%0d exp=%0d", t, cls, ref_argmax(rs));
      end
      seen[ref_argmax(rs)]++;
    end
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (seen[c] == 0) begin failures++; $display("class %0d never produced", c); end
    end
    $display("classes seen: %0d %0d %0d", seen[0], seen[1], seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
