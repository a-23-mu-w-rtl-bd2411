// kws_ref_pkg: reference model and stimulus helpers for the classifier testbenches.
//
// Holds a 16-48-48-12 GRU-FC network with 8-bit weights (Q2.6), a weight-memory
// image builder that lays the weights out in the order the accelerator reads
// them, and a fixed-point reference of one network step written directly from
// the GRU equations:
//   r = sigmoid(W_ir x + W_hr h + b_r)          z likewise
//   n = tanh(W_in x + b_in + r * (W_hn h + b_hn))
//   h' = z * h + (1 - z) * n                    scores = W_fc h2 + b_fc
// with the accelerator's number formats (Q6.8 activations, Q10.14 accumulator
// saturating at 24 bits) and a sigmoid/tanh table computed here in floating
// point: tanh_tab[i] = round(256 * tanh((i + 0.5) / 16)).
// The feature path is modelled too: calibration max(raw - beta, 0) * alpha / 64
// clipped to 12 bits, log2(x + 1) in Q4.6 as exponent plus a rounded table of
// the top six mantissa bits, and (x - mu) * inv_sigma / 64 saturated to 14 bits.
package kws_ref_pkg;

  localparam int NI = 16, NH = 48, NC = 12;

  // network parameters, signed bytes
  int w1x [3][NH][NI];   // layer 1 input weights, gates r, z, n
  int w1h [3][NH][NH];   // layer 1 recurrent weights
  int b1  [4][NH];       // b_r, b_z, b_in, b_hn
  int w2x [3][NH][NH];
  int w2h [3][NH][NH];
  int b2  [4][NH];
  int wf  [NC][NH];
  int bf  [NC];

  // state
  int h1 [NH];
  int h2 [NH];

  byte img [24576];
  int  img_words;

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  // random network; `wmax` bounds the weight magnitude
  function automatic void gen_net(int wmax);
    for (int g = 0; g < 3; g++)
      for (int j = 0; j < NH; j++) begin
        for (int i = 0; i < NI; i++) w1x[g][j][i] = rnd(-wmax, wmax);
        for (int i = 0; i < NH; i++) begin
          w1h[g][j][i] = rnd(-wmax, wmax);
          w2x[g][j][i] = rnd(-wmax, wmax);
          w2h[g][j][i] = rnd(-wmax, wmax);
        end
      end
    for (int g = 0; g < 4; g++)
      for (int j = 0; j < NH; j++) begin
        b1[g][j] = rnd(-64, 64);
        b2[g][j] = rnd(-64, 64);
      end
    for (int c = 0; c < NC; c++) begin
      bf[c] = rnd(-64, 64);
      for (int i = 0; i < NH; i++) wf[c][i] = rnd(-wmax, wmax);
    end
  endfunction

  // ---- weight-memory image, 8 bytes per word, byte l for neuron 8*grp + l ----
  function automatic void put(int word, int lane, int v);
    img[word * 8 + lane] = byte'(v);
  endfunction

  function automatic void build_image();
    int w = 0;
    for (int a = 0; a < 24576; a++) img[a] = 0;
    for (int layer = 0; layer < 2; layer++) begin
      int ni = (layer == 0) ? NI : NH;
      for (int grp = 0; grp < 6; grp++) begin
        for (int g = 0; g < 3; g++) begin
          // bias (r, z) or b_in (n)
          for (int l = 0; l < 8; l++) put(w, l, (layer == 0) ? b1[g][grp*8+l] : b2[g][grp*8+l]);
          w++;
          for (int i = 0; i < ni; i++) begin
            for (int l = 0; l < 8; l++)
              put(w, l, (layer == 0) ? w1x[g][grp*8+l][i] : w2x[g][grp*8+l][i]);
            w++;
          end
          if (g == 2) begin
            for (int l = 0; l < 8; l++) put(w, l, (layer == 0) ? b1[3][grp*8+l] : b2[3][grp*8+l]);
            w++;
          end
          for (int i = 0; i < NH; i++) begin
            for (int l = 0; l < 8; l++)
              put(w, l, (layer == 0) ? w1h[g][grp*8+l][i] : w2h[g][grp*8+l][i]);
            w++;
          end
        end
      end
    end
    for (int grp = 0; grp < 2; grp++) begin
      for (int l = 0; l < 8; l++) put(w, l, (grp*8+l < NC) ? bf[grp*8+l] : 0);
      w++;
      for (int i = 0; i < NH; i++) begin
        for (int l = 0; l < 8; l++) put(w, l, (grp*8+l < NC) ? wf[grp*8+l][i] : 0);
        w++;
      end
    end
    img_words = w;
  endfunction

  // ---- fixed-point helpers ----
  function automatic int sat24(longint v);
    if (v > 8388607) return 8388607;
    if (v < -8388608) return -8388608;
    return int'(v);
  endfunction

  function automatic int sat14(int v);
    if (v > 8191) return 8191;
    if (v < -8192) return -8192;
    return v;
  endfunction

  function automatic int asr(longint v, int n);   // floor(v / 2^n)
    return int'(v >>> n);
  endfunction

  function automatic int tab(int i);
    return int'($rtoi(256.0 * $tanh((real'(i) + 0.5) / 16.0) + 0.5));
  endfunction

  function automatic int tanh_q(int x);
    int m = (x < 0) ? -x : x;
    int idx = m >> 4;
    int v = (idx > 63) ? 256 : tab(idx);
    return (x < 0) ? -v : v;
  endfunction

  function automatic int sigm_q(int x);
    int m = (x < 0) ? -x : x;
    int idx = m >> 5;
    int v = (idx > 63) ? 256 : tab(idx);
    v = (x < 0) ? -v : v;
    return (v + 256) >>> 1;
  endfunction

  function automatic int act_of(int acc);
    return sat14(asr(acc, 6));
  endfunction

  // one GRU layer; x has n_in entries, h is updated in place
  function automatic void gru_layer(input int n_in, input int x[], ref int h[NH],
                                    input int layer);
    int hn [NH];
    for (int j = 0; j < NH; j++) begin
      int acc, r, z, nx, a, n;
      int gv [2];
      for (int g = 0; g < 2; g++) begin
        acc = ((layer == 0) ? b1[g][j] : b2[g][j]) * 256;
        for (int i = 0; i < n_in; i++)
          acc = sat24(longint'(acc) + longint'((layer == 0) ? w1x[g][j][i] : w2x[g][j][i]) * x[i]);
        for (int i = 0; i < NH; i++)
          acc = sat24(longint'(acc) + longint'((layer == 0) ? w1h[g][j][i] : w2h[g][j][i]) * h[i]);
        gv[g] = sigm_q(act_of(acc));
      end
      r = gv[0];
      z = gv[1];
      nx = ((layer == 0) ? b1[2][j] : b2[2][j]) * 256;
      for (int i = 0; i < n_in; i++)
        nx = sat24(longint'(nx) + longint'((layer == 0) ? w1x[2][j][i] : w2x[2][j][i]) * x[i]);
      acc = ((layer == 0) ? b1[3][j] : b2[3][j]) * 256;
      for (int i = 0; i < NH; i++)
        acc = sat24(longint'(acc) + longint'((layer == 0) ? w1h[2][j][i] : w2h[2][j][i]) * h[i]);
      a   = act_of(acc);
      acc = sat24(asr(longint'(a) * r, 2));
      acc = sat24(longint'(acc) + nx);
      n   = tanh_q(act_of(acc));
      acc = sat24(asr(longint'(z) * h[j], 2));
      acc = sat24(longint'(acc) + asr(longint'(256 - z) * n, 2));
      hn[j] = act_of(acc);
    end
    for (int j = 0; j < NH; j++) h[j] = hn[j];
  endfunction

  // ---- feature path ----
  function automatic int cal_ref(int raw, int beta, int alpha);
    int d = (raw > beta) ? raw - beta : 0;
    int v = (d * alpha) / 64;
    return (v > 4095) ? 4095 : v;
  endfunction

  function automatic int log_ref(int x);
    int e = 0, m;
    while ((x + 1) >= (2 << e)) e++;
    m = (((x + 1) - (1 << e)) * 64) >> e;
    return 64 * e + $rtoi(64.0 * $ln(1.0 + real'(m) / 64.0) / $ln(2.0) + 0.5);
  endfunction

  function automatic int norm_ref(int x, int mu, int isig);
    return sat14(asr(longint'(x - mu) * isig, 6));
  endfunction

  function automatic void reset_state();
    for (int j = 0; j < NH; j++) begin h1[j] = 0; h2[j] = 0; end
  endfunction

  // one network step; returns the scores and the arg-max
  function automatic int step(input int fv[NI], output int sc[NC]);
    int x1 [] = new[NI];
    int x2 [] = new[NH];
    int best = 0;
    for (int i = 0; i < NI; i++) x1[i] = fv[i];
    gru_layer(NI, x1, h1, 0);
    for (int i = 0; i < NH; i++) x2[i] = h1[i];
    gru_layer(NH, x2, h2, 1);
    for (int c = 0; c < NC; c++) begin
      int acc = bf[c] * 256;
      for (int i = 0; i < NH; i++) acc = sat24(longint'(acc) + longint'(wf[c][i]) * h2[i]);
      sc[c] = act_of(acc);
    end
    for (int c = 1; c < NC; c++) if (sc[c] > sc[best]) best = c;
    return best;
  endfunction

endpackage
