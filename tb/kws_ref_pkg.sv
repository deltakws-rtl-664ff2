// kws_ref_pkg: bit-true reference model of the Delta-GRU + FC network, used by the testbenches of
// the accelerator and of the whole chip.
//
// It is written straight from the network equations, element by element, without the hardware's
// lanes, FIFOs or pipeline:
//   for every state element i (inputs, then hidden) whose change |cur - prev| exceeds Delta_TH:
//     for every neuron n and gate: M[gate][n] += delta_i * W[gate][n][i]  (saturating)
//   r = sigmoid(M_r), u = sigmoid(M_u), c = tanh(M_cx + r*M_ch), h = c + u*(h - c)
// and the FC layer score[c] = bias[c] + sum_j h_j * W_fc[c][j] at the end of the utterance.
// Weights are held as w[row][lane] in the weight-memory layout documented in kws_pkg.
package kws_ref_pkg;
  import kws_pkg::*;

  int w      [NROWS][NLANE];
  int xhat   [NI];
  int hhat   [NH];
  int h      [NH];
  int m      [4][NH];
  int fc     [NCLS];
  int nz_cnt;

  function automatic int sat(int v, int bits);
    int hi = (1 << (bits - 1)) - 1;
    int lo = -(1 << (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // piecewise-linear sigmoid in Q.8
  function automatic int sig(int x);
    int a = (x < 0) ? -x : x;
    int y;
    if (a >= 5 * 256)            y = 256;
    else if (a >= 2 * 256 + 96)  y = (a >>> 5) + 216;
    else if (a >= 256)           y = (a >>> 3) + 160;
    else                         y = (a >>> 2) + 128;
    return (x < 0) ? 256 - y : y;
  endfunction

  function automatic int tnh(int x);
    return 2 * sig(2 * x) - 256;
  endfunction

  function automatic void randomize_weights(int seed, int mag);
    int s = seed;
    for (int r = 0; r < NROWS; r++)
      for (int l = 0; l < NLANE; l++)
        w[r][l] = int'($urandom_range(2 * mag, 0)) - mag;
  endfunction

  function automatic void init();
    for (int i = 0; i < NI; i++) xhat[i] = 0;
    for (int n = 0; n < NH; n++) begin
      hhat[n] = 0;
      h[n]    = 0;
      for (int s = 0; s < 4; s++) m[s][n] = w[BIAS_BASE + s * 8 + n / 8][n % 8] * 4;
    end
    for (int c = 0; c < NCLS; c++) fc[c] = w[BIAS_BASE + 32 + c / 8][c % 8] * 4;
    nz_cnt = 0;
  endfunction

  // one frame; x holds Q3.8 features
  function automatic void frame(int x [NI], int th);
    int cur, prev, d, ds, r, u, c, sel;
    int hn [NH];
    for (int i = 0; i < NI + NH; i++) begin
      cur  = (i < NI) ? x[i] : h[i - NI];
      prev = (i < NI) ? xhat[i] : hhat[i - NI];
      d    = cur - prev;
      if (((d < 0) ? -d : d) > th) begin
        nz_cnt++;
        ds = sat(d, 12);
        if (i < NI) xhat[i] = sat(prev + ds, 12); else hhat[i - NI] = sat(prev + ds, 12);
        for (int g = 0; g < 3; g++)
          for (int n = 0; n < NH; n++) begin
            sel = (g < 2) ? g : ((i < NI) ? 2 : 3);
            m[sel][n] = sat(m[sel][n] + ((ds * w[(i * 3 + g) * 8 + n / 8][n % 8]) >>> 6), 16);
          end
      end
    end
    for (int n = 0; n < NH; n++) begin
      r = sig(m[0][n]);
      u = sig(m[1][n]);
      c = tnh(sat(m[2][n] + ((r * m[3][n]) >>> 8), 16));
      hn[n] = sat(c + ((u * (h[n] - c)) >>> 8), 12);
    end
    for (int n = 0; n < NH; n++) h[n] = hn[n];
  endfunction

  function automatic int decide();
    int best = 0;
    for (int j = 0; j < NH; j++)
      for (int c = 0; c < NCLS; c++)
        fc[c] = sat(fc[c] + ((h[j] * w[FC_BASE + 2 * j + c / 8][c % 8]) >>> 6), 16);
    for (int c = 1; c < NCLS; c++) if (fc[c] > fc[best]) best = c;
    return best;
  endfunction
endpackage
