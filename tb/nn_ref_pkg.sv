// nn_ref_pkg: reference models for the testbenches.
//
// Plain integer models of the fixed-point network arithmetic, written
// independently of the RTL: values are ints holding Q.10 numbers, products
// are summed exactly in 64 bits, then shifted right by 10 (toward minus
// infinity) and saturated to 16 bits. Activations: ReLU, and sigmoid/tanh
// evaluated with $exp/$tanh at the input rounded to the nearest 1/16 and
// clipped to [-8, 8), which is how the hardware tables are defined.
// Flat arrays (queues) are used throughout: channel-major for layer data,
// and the coefficient layouts documented in each engine.
package nn_ref_pkg;

  typedef int iq_t [$];

  localparam int A_NONE = 0, A_RELU = 1, A_SIG = 2, A_TANH = 3;

  function automatic int r_sat(longint a);
    longint s;
    s = a >>> 10;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  function automatic int r_act(int kind, int x);
    int  q;
    real v, f;
    if (kind == A_NONE) return x;
    if (kind == A_RELU) return (x < 0) ? 0 : x;
    q = (x + 32) >>> 6;
    if (q > 127)  q = 127;
    if (q < -128) q = -128;
    v = real'(q) / 16.0;
    f = (kind == A_SIG) ? 1.0 / (1.0 + $exp(-v)) : $tanh(v);
    return $rtoi(f * 1024.0 + ((f < 0.0) ? -0.5 : 0.5));
  endfunction

  // 1-D convolution; x is in_ch x len (channel-major), weights at
  // coef[off + (o*in_ch + c)*k + t], biases after the weights.
  function automatic iq_t r_conv(iq_t x, int in_ch, int len, iq_t coef, int off,
                                 int out_ch, int k, int act);
    iq_t y;
    int  ol;
    ol = len - k + 1;
    for (int o = 0; o < out_ch; o++)
      for (int j = 0; j < ol; j++) begin
        longint acc;
        acc = longint'(coef[off + out_ch*in_ch*k + o]) <<< 10;
        for (int c = 0; c < in_ch; c++)
          for (int t = 0; t < k; t++)
            acc += longint'(coef[off + (o*in_ch + c)*k + t]) * longint'(x[c*len + j + t]);
        y.push_back(r_act(act, r_sat(acc)));
      end
    return y;
  endfunction

  // CNN: win holds 13 samples, oldest first. Returns {energy, tag}.
  function automatic iq_t r_cnn(iq_t win, iq_t coef, bit four);
    iq_t h1, t, cat, h3, e, r;
    h1 = r_conv(win, 1, 13, coef, 0, 5, 3, A_RELU);
    t  = r_conv(h1, 5, 11, coef, 20, 1, 6, A_SIG);
    for (int i = 0; i < 6; i++) cat.push_back(win[7 + i]);
    for (int i = 0; i < 6; i++) cat.push_back(t[i]);
    if (four) begin
      h3 = r_conv(cat, 2, 6, coef, 51, 3, 4, A_RELU);
      e  = r_conv(h3, 3, 3, coef, 78, 1, 3, A_NONE);
    end else begin
      e  = r_conv(cat, 2, 6, coef, 51, 1, 6, A_NONE);
    end
    r.push_back(e[0]);
    r.push_back(t[5]);
    return r;
  endfunction

  function automatic int r_dense(iq_t h, iq_t coef, int off, int hn);
    longint acc;
    acc = longint'(coef[off + hn]) <<< 10;
    for (int i = 0; i < hn; i++) acc += longint'(coef[off + i]) * longint'(h[i]);
    return r_sat(acc);
  endfunction

  // Vanilla RNN step: wx at 0, wh at hn, b at hn+hn*hn.
  function automatic iq_t r_rnn_step(int x, iq_t h, iq_t coef, int hn);
    iq_t n;
    for (int i = 0; i < hn; i++) begin
      longint acc;
      acc = (longint'(coef[hn + hn*hn + i]) <<< 10) + longint'(coef[i]) * longint'(x);
      for (int j = 0; j < hn; j++) acc += longint'(coef[hn + i*hn + j]) * longint'(h[j]);
      n.push_back(r_act(A_RELU, r_sat(acc)));
    end
    return n;
  endfunction

  function automatic int r_vanilla(iq_t win, iq_t coef, int hn);
    iq_t h;
    for (int i = 0; i < hn; i++) h.push_back(0);
    for (int t = 0; t < win.size(); t++) h = r_rnn_step(win[t], h, coef, hn);
    return r_dense(h, coef, 2*hn + hn*hn, hn);
  endfunction

  // LSTM step; hc holds h (hn values) then c (hn values). Returns new h, c.
  function automatic iq_t r_lstm_step(int x, iq_t hc, iq_t coef, int hn);
    int  ng;
    int  gv [4][];
    iq_t r;
    int  cn [];
    ng = hn + hn*hn + hn;
    for (int g = 0; g < 4; g++) begin
      gv[g] = new[hn];
      for (int i = 0; i < hn; i++) begin
        longint acc;
        acc = (longint'(coef[g*ng + hn + hn*hn + i]) <<< 10)
            + longint'(coef[g*ng + i]) * longint'(x);
        for (int j = 0; j < hn; j++)
          acc += longint'(coef[g*ng + hn + i*hn + j]) * longint'(hc[j]);
        gv[g][i] = r_act((g == 2) ? A_TANH : A_SIG, r_sat(acc));
      end
    end
    cn = new[hn];
    for (int i = 0; i < hn; i++)
      cn[i] = r_sat(longint'(gv[1][i]) * longint'(hc[hn + i])
                  + longint'(gv[0][i]) * longint'(gv[2][i]));
    for (int i = 0; i < hn; i++)
      r.push_back(r_sat(longint'(gv[3][i]) * longint'(r_act(A_TANH, cn[i]))));
    for (int i = 0; i < hn; i++) r.push_back(cn[i]);
    return r;
  endfunction

  function automatic int r_lstm_window(iq_t win, iq_t coef, int hn);
    iq_t hc, h;
    for (int i = 0; i < 2*hn; i++) hc.push_back(0);
    for (int t = 0; t < win.size(); t++) hc = r_lstm_step(win[t], hc, coef, hn);
    for (int i = 0; i < hn; i++) h.push_back(hc[i]);
    return r_dense(h, coef, 4*(hn + hn*hn + hn), hn);
  endfunction

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Random Q.10 value in [-range, range] (range in LSBs).
  function automatic int r_rand(int range);
    return int'($urandom_range(2*range)) - range;
  endfunction

endpackage
