// tb_nn_config_regs: loads a random 4652-bit stream through Config In, checks
// that the load takes exactly 4652 clocks, that every weight and bias field
// holds the bits the layout puts there, that the register holds while
// cfg_shift is low, and that the stream leaves on Config Out in order.
module tb_nn_config_regs;
  import smartpix_pkg::*;

  logic clk = 0, rst_n = 0, cfg_shift = 0, cfg_in = 0, cfg_out;
  logic signed [WB_W-1:0] w1 [N_HIDDEN][N_ROWS];
  logic signed [WB_W-1:0] b1 [N_HIDDEN];
  logic signed [WB_W-1:0] w2 [N_CLASS][N_HIDDEN];
  logic signed [WB_W-1:0] b2 [N_CLASS];
  bit stream [CFG_BITS];
  int checks = 0, failures = 0, cycles = 0;

  nn_config_regs dut (.*);

  always #12 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [3:0] field(int base);
    return {stream[base+3], stream[base+2], stream[base+1], stream[base]};
  endfunction

  task automatic check_fields(string tag);
    int bad = 0;
    for (int h = 0; h < 58; h++) begin
      for (int r = 0; r < 16; r++) if (w1[h][r] !== field((h*16 + r)*4)) bad++;
      if (b1[h] !== field(3712 + h*4)) bad++;
    end
    for (int c = 0; c < 3; c++) begin
      for (int h = 0; h < 58; h++) if (w2[c][h] !== field(3712 + 232 + (c*58 + h)*4)) bad++;
      if (b2[c] !== field(3712 + 232 + 696 + c*4)) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d fields wrong", tag, bad); end
  endtask

  initial begin
    foreach (stream[k]) stream[k] = 1'($urandom_range(1));
    repeat (2) @(posedge clk);
    #1; checks++; if (w1[0][0] !== 4'sd0 || b2[2] !== 4'sd0) failures++;  // reset clears
    rst_n = 1;
    checks++; if (CFG_BITS != 3712 + 232 + 696 + 12) failures++;
    for (int k = 0; k < int'(CFG_BITS); k++) begin
      @(negedge clk); cfg_shift = 1; cfg_in = stream[k];
      @(posedge clk); cycles++;
    end
    @(negedge clk); cfg_shift = 0; cfg_in = 0;
    checks++; if (cycles != 4652) failures++;
    check_fields("after load");
    repeat (10) @(posedge clk);
    #1; check_fields("after hold");
    // shift out: Config Out presents the stream in the order it was sent
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      checks++;
      if (cfg_out !== stream[k]) begin failures++; $display("cfg_out bit %0d wrong", k); end
      cfg_shift = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
