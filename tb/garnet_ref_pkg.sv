// garnet_ref_pkg: bit-accurate reference arithmetic for the testbenches.
//
// Each function evaluates one step of the network directly from its defining
// formula on plain integers (fixed-point values as their integer codes), with
// the number formats documented in garnet_pkg: s7.8 features and weights, s3.8
// distances, u1.17 potentials, s15.16 aggregator sums, s19.12 transformed sums.
// Tables are recomputed here from exp() rather than read from the RTL.
// Arrays are flat: g[v*FIN+j], alpha[a*FIN+j], beta[a], wt[(a*FOUT+k)*FIN+j],
// bt[a*FOUT+k], c[k], y[v*FOUT+k].
package garnet_ref_pkg;

  function automatic longint sat(input longint x, input int width);
    longint hi, lo;
    hi = (64'sd1 <<< (width - 1)) - 1;
    lo = -(64'sd1 <<< (width - 1));
    return (x > hi) ? hi : (x < lo) ? lo : x;
  endfunction

  // exp(-d^2) in u1.17 for a 12-bit distance code (s3.8).
  function automatic longint ref_w(input int dcode);
    real d;
    int  sd;
    sd = dcode & 12'hFFF;
    if (sd >= 2048) sd -= 4096;
    d = real'(sd) / 256.0;
    return longint'($rtoi($exp(-d * d) * 131072.0 + 0.5));
  endfunction

  // Distance code for one vertex and one aggregator.
  function automatic int ref_d(input int FIN, input int a, input int v,
                               ref int g[], ref int alpha[], ref int beta[]);
    longint acc;
    acc = longint'(beta[a]) * 256;
    for (int j = 0; j < FIN; j++) acc += longint'(alpha[a*FIN+j]) * g[v*FIN+j];
    return int'(sat(acc >>> 8, 12));
  endfunction

  // G (s15.16) and L (s15.16) of one sample with V vertices.
  function automatic void ref_gather(input int VMAX, V, FIN, S,
                                     ref int g[], ref int alpha[], ref int beta[],
                                     ref longint gs[], ref longint ls[], ref longint wv[]);
    int vsh;
    vsh = $clog2(VMAX);
    gs = new[S*FIN];
    ls = new[S];
    wv = new[VMAX*S];
    foreach (gs[i]) gs[i] = 0;
    foreach (ls[i]) ls[i] = 0;
    foreach (wv[i]) wv[i] = 0;
    for (int v = 0; v < V; v++)
      for (int a = 0; a < S; a++) begin
        longint w;
        w = ref_w(ref_d(FIN, a, v, g, alpha, beta));
        wv[v*S+a] = w;
        ls[a] += w;
        for (int j = 0; j < FIN; j++) gs[a*FIN+j] += w * g[v*FIN+j];
      end
    foreach (gs[i]) gs[i] = sat(gs[i] >>> (vsh + 9), 32);
    foreach (ls[i]) ls[i] = sat(ls[i] >>> (vsh + 1), 32);
  endfunction

  // Transformed aggregator features H (s19.12).
  function automatic void ref_xform(input int FIN, S, FOUT, TW_FRAC,
                                    ref longint gs[], ref longint ls[],
                                    ref int wt[], ref int bt[], ref longint h[]);
    h = new[S*FOUT];
    for (int a = 0; a < S; a++)
      for (int k = 0; k < FOUT; k++) begin
        longint acc;
        acc = longint'(bt[a*FOUT+k]) * ls[a];
        for (int j = 0; j < FIN; j++) acc += longint'(wt[(a*FOUT+k)*FIN+j]) * gs[a*FIN+j];
        h[a*FOUT+k] = sat(acc >>> (4 + TW_FRAC), 32);
      end
  endfunction

  // One output vertex: y_k = sat16((sum_a W_a H_ak) >>> 21 + c_k).
  function automatic int ref_out(input int S, FOUT, k, input longint w[], ref longint h[], ref int c[]);
    longint acc;
    acc = 0;
    for (int a = 0; a < S; a++) acc += w[a] * h[a*FOUT+k];
    return int'(sat((acc >>> 21) + c[k], 16));
  endfunction

  // Whole GarNet layer.
  function automatic void ref_layer(input int VMAX, V, FIN, S, FOUT, TW_FRAC,
                                    ref int g[], ref int alpha[], ref int beta[], ref int wt[],
                                    ref int bt[], ref int c[], ref int y[]);
    longint gs[], ls[], wv[], h[], wa[];
    ref_gather(VMAX, V, FIN, S, g, alpha, beta, gs, ls, wv);
    ref_xform(FIN, S, FOUT, TW_FRAC, gs, ls, wt, bt, h);
    y = new[VMAX*FOUT];
    foreach (y[i]) y[i] = 0;
    wa = new[S];
    for (int v = 0; v < V; v++) begin
      for (int a = 0; a < S; a++) wa[a] = wv[v*S+a];
      for (int k = 0; k < FOUT; k++) y[v*FOUT+k] = ref_out(S, FOUT, k, wa, h, c);
    end
  endfunction

  // Mean over V vertices through the reciprocal round(2^16/V).
  function automatic int ref_mean(input int V, F, k, ref int y[]);
    longint s, r;
    s = 0;
    for (int v = 0; v < V; v++) s += y[v*F+k];
    r = (V == 0) ? 0 : ((longint'(1) << 17) / V + 1) / 2;
    return int'(sat((s * r) >>> 16, 16));
  endfunction

  // Dense layer, weights w[o*NIN+i], biases b[o].
  function automatic void ref_dense(input int NIN, NOUT, input bit relu,
                                    ref int x[], ref int w[], ref int b[], ref int y[]);
    y = new[NOUT];
    for (int o = 0; o < NOUT; o++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < NIN; i++) acc += longint'(w[o*NIN+i]) * x[i];
      y[o] = int'(sat((acc >>> 8) + b[o], 16));
      if (relu && y[o] < 0) y[o] = 0;
    end
  endfunction

  // Sigmoid table output (u0.16) for an s7.8 input.
  function automatic int ref_sigmoid(input int x);
    int  i;
    real s;
    i = x >>> 2;
    if (i < -512) i = -512;
    if (i > 511) i = 511;
    s = 65536.0 / (1.0 + $exp(-real'(i) / 64.0)) + 0.5;
    if (s > 65535.0) s = 65535.0;
    return $rtoi(s);
  endfunction

endpackage
