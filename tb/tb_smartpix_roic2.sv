// tb_smartpix_roic2: end-to-end test of the two-matrix chip at its default
// sizes (two matrices of 16 x 16 pixels, 58 hidden neurons).
//
// 1. Random 4-bit weights and biases for both matrices are shifted in through
//    the daisy-chained configuration chain (2 x 4652 clocks, counted); this
//    is repeated with three weight sets, each tilted towards another class.
// 2. Bunch crossings: random sparse charge deposits (and, in some crossings,
//    injected test charge on chosen pixels) are applied to both matrices; one
//    clock edge later the row sums, the class and keep of each matrix are
//    compared with values computed here from the charges, the thresholds and
//    the integer network model of nn_ref_pkg.
// 3. A crossing captured with the comparator reset (az) high must give empty
//    matrices.
// 4. The pixel readout chain of each matrix is shifted out (768 clocks) and
//    every Data bit is compared with the expected thermometer code.
// Each mechanism (weight load through the chain, hit capture, charge
// injection, comparator reset, scan readout, each of the three classes with
// keep and reject) is counted; one that never happened counts as a failure.
module tb_smartpix_roic2;
  import smartpix_pkg::*;
  import nn_ref_pkg::*;

  localparam int NM = 2;
  localparam int NEV = 30;

  logic        clk = 0, rst_n = 0;
  logic [15:0] q_in_e      [NM][N_ROWS][N_COLS];
  logic        test_enable [NM][N_ROWS][N_COLS];
  logic [15:0] q_test_e;
  logic [15:0] vth_e       [NM][N_COMP];
  logic        az, readout_enable;
  logic        scan_in [NM], scan_out [NM];
  logic        cfg_shift, cfg_in, cfg_out;
  logic [SUM_W-1:0] row_sums [NM][N_ROWS];
  pt_class_e   cls  [NM];
  logic        keep [NM];

  smartpix_roic2 dut (.*);

  always #12 clk = ~clk;

  int checks = 0, failures = 0;
  int n_cfg = 0, n_capture = 0, n_inject = 0, n_az = 0, n_readout = 0;
  int n_cls [3] = '{0, 0, 0};
  int n_keep = 0, n_reject = 0;

  // reference weights per matrix
  mat1_t rw1 [NM]; vec_hid_t rb1 [NM]; mat2_t rw2 [NM]; vec_cls_t rb2 [NM];
  bit    cfgbits [NM][CFG_BITS];
  int    exp_adc [NM][N_ROWS][N_COLS];

  initial begin : watchdog
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put4(int m, int pos, int v);
    for (int b = 0; b < 4; b++) cfgbits[m][pos + b] = 1'((v >> b) & 1);
  endtask

  // Weight set favouring class fav: its output weights are drawn from 0..7,
  // the others from -8..0, so that every class wins in some crossings.
  task automatic make_weights(int m, int fav);
    for (int h = 0; h < NH; h++) begin
      rb1[m][h] = rnd4(); put4(m, 3712 + h*4, rb1[m][h]);
      for (int r = 0; r < NR; r++) begin
        rw1[m][h][r] = rnd4(); put4(m, (h*16 + r)*4, rw1[m][h][r]);
      end
    end
    for (int c = 0; c < NC; c++) begin
      rb2[m][c] = rnd4(); put4(m, 3712 + 232 + 696 + c*4, rb2[m][c]);
      for (int h = 0; h < NH; h++) begin
        rw2[m][c][h] = (c == fav) ? int'($urandom_range(7)) : -int'($urandom_range(8)); put4(m, 3712 + 232 + (c*58 + h)*4, rw2[m][c][h]);
      end
    end
  endtask

  // one bunch crossing: drive charges at the falling edge, capture at the rising edge
  task automatic crossing(bit use_az, bit use_inj);
    int thr [3];
    @(negedge clk);
    az = use_az;
    readout_enable = 0;
    q_test_e = 16'($urandom_range(300, 1500));
    for (int m = 0; m < NM; m++) begin
      int cr = $urandom_range(15), cc = $urandom_range(15);
      for (int i = 0; i < 3; i++) thr[i] = int'(vth_e[m][i]);
      for (int r = 0; r < NR; r++)
        for (int c = 0; c < 16; c++) begin
          int q = 0;
          // a cluster around (cr, cc) plus sparse noise hits elsewhere
          if ((r - cr) * (r - cr) + (c - cc) * (c - cc) <= 6) q = $urandom_range(2000);
          else if ($urandom_range(40) == 0) q = $urandom_range(800);
          q_in_e[m][r][c] = 16'(q);
          test_enable[m][r][c] = use_inj && ($urandom_range(3) == 0);
          if (test_enable[m][r][c]) q += int'(q_test_e);
          exp_adc[m][r][c] = 0;
          if (!use_az) for (int i = 0; i < 3; i++) if (q >= thr[i]) exp_adc[m][r][c]++;
        end
    end
    @(posedge clk);
    #1;
    if (use_az) n_az++; else n_capture++;
    if (use_inj) n_inject++;
    for (int m = 0; m < NM; m++) begin
      vec_in_t x; vec_cls_t s; int k;
      int bad = 0;
      for (int r = 0; r < NR; r++) begin
        x[r] = 0;
        for (int c = 0; c < 16; c++) x[r] += exp_adc[m][r][c];
        if (int'(row_sums[m][r]) != x[r]) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("matrix %0d: %0d row sums wrong", m, bad); end
      ref_scores(x, rw1[m], rb1[m], rw2[m], rb2[m], s);
      k = ref_argmax(s);
      checks++;
      if (int'(cls[m]) != k || keep[m] !== (k == 2)) begin
        failures++; $display("matrix %0d: class %0d expected %0d", m, cls[m], k);
      end
      n_cls[k]++;
      if (keep[m]) n_keep++; else n_reject++;
    end
  endtask

  // shift out both pixel chains and compare every bit
  task automatic readout();
    int bad = 0;
    @(negedge clk);
    az = 0;
    readout_enable = 1;
    scan_in[0] = 0; scan_in[1] = 0;
    for (int k = 0; k < int'(N_PIX) * 3; k++) begin
      int p = int'(N_PIX) - 1 - k / 3;
      int bit_i = k % 3;
      for (int m = 0; m < NM; m++) begin
        bit expb = (exp_adc[m][p / 16][p % 16] > bit_i);
        if (scan_out[m] !== expb) bad++;
      end
      @(negedge clk);
    end
    readout_enable = 0;
    checks++;
    if (bad != 0) begin failures++; $display("readout: %0d bits wrong", bad); end
    n_readout++;
  endtask

  initial begin
    int cycles;
    az = 0; readout_enable = 0; cfg_shift = 0; cfg_in = 0; q_test_e = 0;
    for (int m = 0; m < NM; m++) begin
      scan_in[m] = 0;
      vth_e[m][0] = 400; vth_e[m][1] = 800; vth_e[m][2] = 1200;
      for (int r = 0; r < NR; r++) for (int c = 0; c < 16; c++) begin
        q_in_e[m][r][c] = 0; test_enable[m][r][c] = 0;
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    for (int set = 0; set < 3; set++) begin
      // 1. weight load: the last matrix's bits first, they travel through the others
      for (int m = 0; m < NM; m++) make_weights(m, (set + m) % 3);
      cycles = 0;
      for (int m = NM - 1; m >= 0; m--)
        for (int k = 0; k < int'(CFG_BITS); k++) begin
          @(negedge clk); cfg_shift = 1; cfg_in = cfgbits[m][k];
          @(posedge clk); cycles++;
        end
      @(negedge clk); cfg_shift = 0;
      checks++;
      if (cycles != NM * 4652) begin failures++; $display("load took %0d clocks", cycles); end
      n_cfg++;

      // 2.-4. bunch crossings
      for (int e = 0; e < NEV; e++) begin
        crossing(0, e % 3 == 2);
        if (e == 5 && set == 0 || e == NEV - 1) readout();
        if (e % 10 == 7) crossing(1, 0);
      end
    end

    checks++; if (n_cfg == 0)     begin failures++; $display("no weight load"); end
    checks++; if (n_capture == 0) begin failures++; $display("no capture"); end
    checks++; if (n_inject == 0)  begin failures++; $display("no injection"); end
    checks++; if (n_az == 0)      begin failures++; $display("no comparator reset"); end
    checks++; if (n_readout == 0) begin failures++; $display("no readout"); end
    for (int c = 0; c < 3; c++) begin
      checks++; if (n_cls[c] == 0) begin failures++; $display("class %0d never seen", c); end
    end
    checks++; if (n_keep == 0 || n_reject == 0) begin failures++; $display("keep/reject missing"); end
    $display("mechanisms: load=%0d capture=%0d inject=%0d az=%0d readout=%0d cls=%0d/%0d/%0d keep=%0d reject=%0d",
             n_cfg, n_capture, n_inject, n_az, n_readout, n_cls[0], n_cls[1], n_cls[2], n_keep, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
