// tpb_common_pkg: reference data shared by the TPB-level testbenches: a
// random 32x32 int8 activation tile in the TCU's activation word layout, a
// random 32x64 weight tile in its weight layout, and the expected output
// words (ReLU, shift 10, int8 saturation).
package tpb_common_pkg;
  import m100_pkg::*;
  int A [32][32], W [32][64], C [32][64];
  word_t aw [32], ww [64];

  function automatic int sat8(input int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  function automatic void make_tile();
    for (int i = 0; i < 32; i++) for (int k = 0; k < 32; k++) A[i][k] = int'($urandom % 256) - 128;
    for (int k = 0; k < 32; k++) for (int j = 0; j < 64; j++) W[k][j] = int'($urandom % 256) - 128;
    for (int i = 0; i < 32; i++) for (int j = 0; j < 64; j++) begin
      C[i][j] = 0;
      for (int k = 0; k < 32; k++) C[i][j] += A[i][k] * W[k][j];
    end
    for (int t = 0; t < 32; t++)
      for (int r = 0; r < 8; r++) for (int e = 0; e < 4; e++)
        aw[t][(r*4+e)*8 +: 8] = 8'(A[8*(t%4)+r][4*(t/4)+e]);
    for (int q = 0; q < 64; q++)
      for (int j = 0; j < 32; j++) ww[q][j*8 +: 8] = 8'(W[q/2][32*(q%2)+j]);
  endfunction

  // tile output word q (ReLU, shift 10)
  function automatic word_t cword(input int q);
    word_t w;
    for (int j = 0; j < 32; j++) begin
      int v;
      v = C[q/2][32*(q%2)+j];
      if (v < 0) v = 0;
      w[j*8 +: 8] = 8'(sat8(v >>> 10));
    end
    return w;
  endfunction
endpackage
