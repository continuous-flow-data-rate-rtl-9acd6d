// tb_cnn_ref_pkg: bit-exact reference model of the running-example CNN,
// written directly from the layer definitions (zero-padded convolution,
// max pooling, dense layer), independent of the streaming hardware.
//   C1: 5x5, 1 -> 8, pad 2, shift 9, seed 11     P1: 2x2 / 2
//   C2: 5x5, 8 -> 16, pad 2, shift 10, seed 23   P2: 3x3 / 3
//   F1: 256 -> 10, features in (row, col, channel) order, shift 7, seed 37
package tb_cnn_ref_pkg;
  import tb_ref_pkg::*;

  typedef int img1_t  [24][24];
  typedef int fm24_t  [8][24][24];
  typedef int fm12a_t [8][12][12];
  typedef int fm12b_t [16][12][12];
  typedef int fm4_t   [16][4][4];
  typedef int scores_t [10];

  function automatic int conv_px(int seed, int shift, int din, int f, int F,
                                 int r, int c, ref int x [][][]);
    longint acc = 0;
    for (int ch = 0; ch < din; ch++)
      for (int j = 0; j < 25; j++) begin
        int rr, cc;
        rr = r + j / 5 - 2; cc = c + j % 5 - 2;
        if (rr >= 0 && rr < F && cc >= 0 && cc < F)
          acc += longint'(ref_param(seed, (f * din + ch) * 25 + j)) * x[ch][rr][cc];
      end
    acc += longint'(ref_param(seed + 1000, f)) <<< shift;
    return int'(ref_requant(acc, shift, 1'b1, 8));
  endfunction

  function automatic void run(input img1_t img, output scores_t sc);
    int x0 [][][];
    int a1 [][][];
    int p1 [][][];
    int a2 [][][];
    int p2 [16][4][4];
    x0 = new[1]; x0[0] = new[24]; foreach (x0[0][r]) begin x0[0][r] = new[24]; foreach (x0[0][r][c]) x0[0][r][c] = img[r][c]; end
    a1 = new[8];
    foreach (a1[f]) begin
      a1[f] = new[24];
      foreach (a1[f][r]) begin
        a1[f][r] = new[24];
        foreach (a1[f][r][c]) a1[f][r][c] = conv_px(11, 9, 1, f, 24, r, c, x0);
      end
    end
    p1 = new[8];
    foreach (p1[f]) begin
      p1[f] = new[12];
      foreach (p1[f][r]) begin
        p1[f][r] = new[12];
        foreach (p1[f][r][c]) begin
          int m = -1000;
          for (int k = 0; k < 4; k++) if (a1[f][2*r + k/2][2*c + k%2] > m) m = a1[f][2*r + k/2][2*c + k%2];
          p1[f][r][c] = m;
        end
      end
    end
    a2 = new[16];
    foreach (a2[f]) begin
      a2[f] = new[12];
      foreach (a2[f][r]) begin
        a2[f][r] = new[12];
        foreach (a2[f][r][c]) a2[f][r][c] = conv_px(23, 10, 8, f, 12, r, c, p1);
      end
    end
    foreach (p2[f, r, c]) begin
      int m;
      m = -1000;
      for (int k = 0; k < 9; k++) if (a2[f][3*r + k/3][3*c + k%3] > m) m = a2[f][3*r + k/3][3*c + k%3];
      p2[f][r][c] = m;
    end
    for (int n = 0; n < 10; n++) begin
      longint s;
      s = 0;
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) for (int ch = 0; ch < 16; ch++)
        s += longint'(ref_param(37, n * 256 + (r * 4 + c) * 16 + ch)) * p2[ch][r][c];
      sc[n] = int'(ref_requant(s, 7, 1'b0, 12));
    end
  endfunction
endpackage
