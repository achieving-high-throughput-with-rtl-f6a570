// eq_ref_pkg -- reference model of the equalizer for the testbenches.
//
// Written directly from the layer equations on whole sequences (no windows,
// no streaming), so it shares no structure with the RTL. Integer arithmetic
// follows the fixed-point formats documented in eq_pkg:
//   inference  h = b0 + sum x*w0 (10 frac bits), a = clamp(h >>> 4, 0, 1023)
//              z = sat16(b1 + sum a*w1)
//   training   h = (b0 << 6) + sum x*w0 (26 frac), a = h > 0 ? sat24(h >>> 10) : 0
//              z = sat24(((b1 << 16) + sum a*w1) >>> 20)
//              e = sat24(z - (t << 10))
//              dW1 = sum_m (e*a) >>> 8,   dB1 = sum_m e << 8
//              d[p][i] = relu'(h) * sat24((sum_o e*w1) >>> 20) for each output m
//              dW0 = sum (sum_p d*x) << 2, dB0 = sum (sum_p d) << 8
//   update     W = sat24(W - (sum_j g_j >>> (4 + LR_SHIFT)))
//
// Interface: functions on whole sequences held in dynamic arrays (samples
// x[8*beats], targets t[4*beats], activations a[positions*4], outputs
// z[outputs*8]); no timing. Follows the architecture's layer equations; the
// fixed-point formats are this design's own.
package eq_ref_pkg;
  import eq_pkg::*;

  function automatic longint sat(input longint v, input int w);
    longint hi, lo;
    hi = (64'sd1 <<< (w-1)) - 1;
    lo = -(64'sd1 <<< (w-1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // Sample of a sequence with the zero padding outside it.
  function automatic longint xs(input int x[], input int idx);
    return (idx >= 0 && idx < x.size()) ? longint'(x[idx]) : 0;
  endfunction

  // Layer 0 of the inference path: a[p*C1 + c].
  function automatic void ref_inf_l0(input int x[], input qweights_t q, output int a[]);
    int np;
    np = x.size() / SPB;
    a = new[np*C1];
    for (int p = 0; p < np; p++)
      for (int c = 0; c < C1; c++) begin
        longint h;
        h = longint'($signed(q.b0[c]));
        for (int k = 0; k < K; k++)
          h += xs(x, SPB*p + k - PAD) * longint'($signed(q.w0[c][k]));
        h = h >>> (X_F + QW_F - A_F);
        a[p*C1 + c] = int'((h < 0) ? 0 : (h > 1023) ? 1023 : h);
      end
  endfunction

  // Layer 1 of the inference path from activations a[p*C1+i]: z[m*C2+o].
  function automatic void ref_inf_l1(input int a[], input qweights_t q, output int z[]);
    int np;
    np = a.size() / C1;
    z = new[(np/2)*C2];
    for (int m = 0; m < np/2; m++)
      for (int o = 0; o < C2; o++) begin
        longint acc;
        acc = longint'($signed(q.b1[o]));
        for (int i = 0; i < C1; i++)
          for (int k = 0; k < K; k++) begin
            int p;
            p = 2*m + k - PAD;
            if (p >= 0 && p < np)
              acc += longint'(a[p*C1 + i]) * longint'($signed(q.w1[i][o][k]));
          end
        z[m*C2 + o] = int'(sat(acc, Z_W));
      end
  endfunction

  function automatic void ref_infer(input int x[], input qweights_t q, output int z[]);
    int a[];
    ref_inf_l0(x, q, a);
    ref_inf_l1(a, q, z);
  endfunction

  // Training layer 0: activations a[p*C1+c] and ReLU derivative act[p*C1+c].
  function automatic void ref_tr_l0(input int x[], input tweights_t w, output longint a[], output bit act[]);
    int np;
    np = x.size() / SPB;
    a = new[np*C1];
    act = new[np*C1];
    for (int p = 0; p < np; p++)
      for (int c = 0; c < C1; c++) begin
        longint h;
        h = longint'($signed(w.b0[c])) <<< X_F;
        for (int k = 0; k < K; k++)
          h += xs(x, SPB*p + k - PAD) * longint'($signed(w.w0[c][k]));
        act[p*C1 + c] = (h > 0);
        a[p*C1 + c]   = (h > 0) ? sat(h >>> (X_F + TW_F - TA_F), T_W) : 0;
      end
  endfunction

  // Training layer 1: z[m*C2+o] from a.
  function automatic void ref_tr_l1(input longint a[], input tweights_t w, output longint z[]);
    int np;
    np = a.size() / C1;
    z = new[(np/2)*C2];
    for (int m = 0; m < np/2; m++)
      for (int o = 0; o < C2; o++) begin
        longint acc;
        acc = longint'($signed(w.b1[o])) <<< TA_F;
        for (int i = 0; i < C1; i++)
          for (int k = 0; k < K; k++) begin
            int p;
            p = 2*m + k - PAD;
            if (p >= 0 && p < np)
              acc += a[p*C1 + i] * longint'($signed(w.w1[i][o][k]));
          end
        z[m*C2 + o] = sat(acc >>> TW_F, T_W);
      end
  endfunction

  // Full training step of one sequence: outputs z (24 bit) and gradients.
  function automatic void ref_train(input int x[], input int t[], input tweights_t w,
                                    output longint z[], output grads_t g);
    longint a[];
    bit     act[];
    int     np;
    longint gw0[C1][K], gb0[C1], gw1[C1][C2][K], gb1[C2];
    ref_tr_l0(x, w, a, act);
    ref_tr_l1(a, w, z);
    np = a.size() / C1;
    gw0 = '{default: 0}; gb0 = '{default: 0}; gw1 = '{default: 0}; gb1 = '{default: 0};
    for (int m = 0; m < np/2; m++) begin
      longint e[C2];
      for (int o = 0; o < C2; o++)
        e[o] = sat(z[m*C2 + o] - (longint'(t[m*C2 + o]) <<< (TA_F - X_F)), T_W);
      for (int o = 0; o < C2; o++) begin
        gb1[o] += e[o] <<< (G_F - TA_F);
        for (int i = 0; i < C1; i++)
          for (int k = 0; k < K; k++) begin
            int p;
            p = 2*m + k - PAD;
            if (p >= 0 && p < np)
              gw1[i][o][k] += (e[o] * a[p*C1 + i]) >>> (2*TA_F - G_F);
          end
      end
      for (int c = 0; c < C1; c++) begin
        longint sb;
        longint sw[K];
        sb = 0;
        sw = '{default: 0};
        for (int k = 0; k < K; k++) begin
          int p;
          p = 2*m + k - PAD;
          if (p >= 0 && p < np && act[p*C1 + c]) begin
            longint s, d;
            s = 0;
            for (int o = 0; o < C2; o++) s += e[o] * longint'($signed(w.w1[c][o][k]));
            d = sat(s >>> TW_F, T_W);
            sb += d;
            for (int kk = 0; kk < K; kk++) sw[kk] += d * xs(x, SPB*p + kk - PAD);
          end
        end
        gb0[c] += sb <<< (G_F - TA_F);
        for (int kk = 0; kk < K; kk++) gw0[c][kk] += sw[kk] <<< (G_F - TA_F - X_F);
      end
    end
    for (int c = 0; c < C1; c++) begin
      g.b0[c] = g_t'(gb0[c]);
      for (int k = 0; k < K; k++) g.w0[c][k] = g_t'(gw0[c][k]);
    end
    for (int i = 0; i < C1; i++)
      for (int o = 0; o < C2; o++)
        for (int k = 0; k < K; k++) g.w1[i][o][k] = g_t'(gw1[i][o][k]);
    for (int o = 0; o < C2; o++) g.b1[o] = g_t'(gb1[o]);
  endfunction

  function automatic tw_t upd1(input tw_t w, input longint gsum, input int lr_shift);
    return tw_t'(sat(longint'($signed(w)) - (gsum >>> (G_F - TW_F + lr_shift)), T_W));
  endfunction

  // Weight update with the summed gradients of several instances.
  function automatic tweights_t ref_update(input tweights_t w, input grads_t g[], input int lr_shift);
    tweights_t r;
    for (int c = 0; c < C1; c++) begin
      longint s;
      s = 0; foreach (g[j]) s += longint'($signed(g[j].b0[c]));
      r.b0[c] = upd1(w.b0[c], s, lr_shift);
      for (int k = 0; k < K; k++) begin
        s = 0; foreach (g[j]) s += longint'($signed(g[j].w0[c][k]));
        r.w0[c][k] = upd1(w.w0[c][k], s, lr_shift);
      end
    end
    for (int i = 0; i < C1; i++)
      for (int o = 0; o < C2; o++)
        for (int k = 0; k < K; k++) begin
          longint s;
          s = 0; foreach (g[j]) s += longint'($signed(g[j].w1[i][o][k]));
          r.w1[i][o][k] = upd1(w.w1[i][o][k], s, lr_shift);
        end
    for (int o = 0; o < C2; o++) begin
      longint s;
      s = 0; foreach (g[j]) s += longint'($signed(g[j].b1[o]));
      r.b1[o] = upd1(w.b1[o], s, lr_shift);
    end
    return r;
  endfunction

  // Quantization of a training weight set for the inference module.
  function automatic qweights_t ref_quant(input tweights_t w);
    qweights_t q;
    for (int c = 0; c < C1; c++) begin
      q.b0[c] = qb_t'(sat(longint'($signed(w.b0[c])) >>> 10, QB_W));
      for (int k = 0; k < K; k++) q.w0[c][k] = qw_t'(sat(longint'($signed(w.w0[c][k])) >>> 16, QW_W));
    end
    for (int i = 0; i < C1; i++)
      for (int o = 0; o < C2; o++)
        for (int k = 0; k < K; k++) q.w1[i][o][k] = qw_t'(sat(longint'($signed(w.w1[i][o][k])) >>> 16, QW_W));
    for (int o = 0; o < C2; o++) q.b1[o] = qb_t'(sat(longint'($signed(w.b1[o])) >>> 10, QB_W));
    return q;
  endfunction

  // Random training weight set: weights within +-0.5, biases within +-0.25.
  function automatic tweights_t rand_tw();
    tweights_t w;
    for (int c = 0; c < C1; c++) begin
      w.b0[c] = tw_t'(int'($urandom_range(0, 1 << 19)) - (1 << 18));
      for (int k = 0; k < K; k++) w.w0[c][k] = tw_t'(int'($urandom_range(0, 1 << 20)) - (1 << 19));
    end
    for (int i = 0; i < C1; i++)
      for (int o = 0; o < C2; o++)
        for (int k = 0; k < K; k++) w.w1[i][o][k] = tw_t'(int'($urandom_range(0, 1 << 20)) - (1 << 19));
    for (int o = 0; o < C2; o++) w.b1[o] = tw_t'(int'($urandom_range(0, 1 << 19)) - (1 << 18));
    return w;
  endfunction

  // Random sample in the 10-bit input range.
  function automatic int rand_x();
    return int'($urandom_range(0, 1023)) - 512;
  endfunction

  // Random PAM-4 like target: levels 0, 1, 2, 3 (6 fraction bits).
  function automatic int rand_t();
    return int'($urandom_range(0, 3)) << X_F;
  endfunction
endpackage
