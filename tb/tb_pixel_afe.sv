// tb_pixel_afe: checks the pixel front-end model. Random sensor charges,
// injected test charges, thresholds and the comparator reset are applied; each
// comparator output is compared with the threshold rule worked out here.
module tb_pixel_afe;
  import smartpix_pkg::*;

  logic [15:0] q_in_e, q_test_e;
  logic        test_enable, az;
  logic [15:0] vth_e [N_COMP];
  logic [N_COMP-1:0] comp;
  int checks = 0, failures = 0;

  pixel_afe #(.OFFSET_E(-20)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      q_in_e      = 16'($urandom_range(3000));
      q_test_e    = 16'($urandom_range(3000));
      test_enable = 1'($urandom_range(1));
      az          = ($urandom_range(7) == 0);
      vth_e[0]    = 16'($urandom_range(400, 800));
      vth_e[1]    = 16'($urandom_range(800, 1600));
      vth_e[2]    = 16'($urandom_range(1600, 3200));
      #1;
      for (int i = 0; i < 3; i++) begin
        automatic int q = int'(q_in_e) + (test_enable ? int'(q_test_e) : 0);
        automatic logic exp = !az && (q >= int'(vth_e[i]) - 20);
        checks++;
        if (comp[i] !== exp) begin
          failures++;
          if (failures < 10) $display("mismatch t=%0d comp[%0d]=%b exp=%b q=%0d vth=%0d", t, i, comp[i], exp, q, vth_e[i]);
        end
      end
    end
    // exact threshold edge: charge equal to threshold + offset fires, one below does not
    az = 0; test_enable = 0; vth_e[0] = 500; vth_e[1] = 1000; vth_e[2] = 1500;
    q_in_e = 480; #1; checks++; if (comp !== 3'b001) failures++;
    q_in_e = 479; #1; checks++; if (comp !== 3'b000) failures++;
    q_in_e = 1480; #1; checks++; if (comp !== 3'b111) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
