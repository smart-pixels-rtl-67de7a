// nn_ref_pkg: reference model of the momentum classifier for the testbenches.
//
// Plain integer arithmetic on int arrays, written independently of the RTL:
// h[j] = max(0, b1[j] + sum_r w1[j][r] * x[r]); s[c] = b2[c] + sum_j w2[c][j] * h[j];
// the class is the first index of the largest s.
package nn_ref_pkg;

  localparam int NR = 16;
  localparam int NH = 58;
  localparam int NC = 3;

  typedef int vec_in_t  [NR];
  typedef int vec_hid_t [NH];
  typedef int vec_cls_t [NC];
  typedef int mat1_t    [NH][NR];
  typedef int mat2_t    [NC][NH];

  function automatic void ref_scores(input vec_in_t x, input mat1_t w1, input vec_hid_t b1,
                                     input mat2_t w2, input vec_cls_t b2,
                                     output vec_cls_t s);
    vec_hid_t h;
    for (int j = 0; j < NH; j++) begin
      int a = b1[j];
      for (int r = 0; r < NR; r++) a += w1[j][r] * x[r];
      h[j] = (a < 0) ? 0 : a;
    end
    for (int c = 0; c < NC; c++) begin
      int a = b2[c];
      for (int j = 0; j < NH; j++) a += w2[c][j] * h[j];
      s[c] = a;
    end
  endfunction

  function automatic int ref_argmax(input vec_cls_t s);
    int best = 0;
    for (int c = 1; c < NC; c++) if (s[c] > s[best]) best = c;
    return best;
  endfunction

  // random signed 4-bit value
  function automatic int rnd4();
    return int'($urandom_range(15)) - 8;
  endfunction

endpackage
