// lfads_ref_pkg: bit-level reference model of the LFADS datapath for the
// testbenches.
//
// Written from the arithmetic rules, not from the RTL: values are integers
// in units of 2^-DF (data) or 2^-WF (weights), held in longint. Every add and
// product of the model is floored to the data grid and clamped to the DW-bit
// range. Matrices are flat arrays with index i*N_OUT + o (input i, output o).
package lfads_ref_pkg;

  typedef longint vec_t[];

  function automatic longint sat(longint v, int dw);
    longint hi = (longint'(1) << (dw - 1)) - 1;
    longint lo = -(longint'(1) << (dw - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // floor(v / 2^s) for any sign
  function automatic longint fdiv(longint v, int s);
    longint d = longint'(1) << s;
    longint q = v / d;
    if ((v % d != 0) && (v < 0)) q = q - 1;
    return q;
  endfunction

  // clip(x/2 + 1/2, 0, 1 - 2^-df) on the 2^-df grid
  function automatic longint hsig(longint x, int df);
    longint one = longint'(1) << df;
    longint v = fdiv(x, 1) + one / 2;
    return (v < 0) ? 0 : (v > one - 1) ? one - 1 : v;
  endfunction

  // 2*hsig(x) - 1
  function automatic longint htanh(longint x, int df);
    return 2 * hsig(x, df) - (longint'(1) << df);
  endfunction

  function automatic longint qmul(longint a, longint b, int df, int dw);
    return sat(fdiv(a * b, df), dw);
  endfunction

  function automatic vec_t dense(vec_t w, vec_t b, vec_t x, int n_in, int n_out,
                                 int df, int wf, int dw);
    vec_t y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint acc = b[o] << df;
      for (int i = 0; i < n_in; i++) acc += w[i*n_out + o] * x[i];
      y[o] = sat(fdiv(acc, wf), dw);
    end
    return y;
  endfunction

  // One Keras-style GRU step (gate order z, r, h; reset after the recurrent
  // dense): s' = z*s + (1-z)*hardtanh(gx_h + r*gs_h).
  function automatic vec_t gru_step(vec_t wx, vec_t bx, vec_t ws, vec_t bs, vec_t x, vec_t s,
                                    int n_in, int n, int df, int wf, int dw);
    vec_t gx = dense(wx, bx, x, n_in, 3*n, df, wf, dw);
    vec_t gs = dense(ws, bs, s, n, 3*n, df, wf, dw);
    vec_t sn = new[n];
    for (int u = 0; u < n; u++) begin
      longint z  = hsig(sat(gx[u] + gs[u], dw), df);
      longint r  = hsig(sat(gx[n+u] + gs[n+u], dw), df);
      longint hh = htanh(sat(gx[2*n+u] + qmul(r, gs[2*n+u], df, dw), dw), df);
      sn[u] = sat(qmul(z, s[u], df, dw) + qmul((longint'(1) << df) - z, hh, df, dw), dw);
    end
    return sn;
  endfunction

  // |got - exp(x)| within 0.5% or 3 LSB; saturated results must sit at the top.
  function automatic bit exp_ok(longint x, longint got, int df, int dw);
    real xr   = real'(x) / real'(longint'(1) << df);
    real er   = $exp(xr) * real'(longint'(1) << df);
    real ymax = real'((longint'(1) << (dw - 1)) - 1);
    real d;
    if (er >= ymax) return got == longint'(ymax);
    d = real'(got) - er;
    if (d < 0) d = -d;
    return (d <= 3.0) || (d <= 0.005 * er);
  endfunction

  function automatic longint rnd_range(longint lim);
    // uniform in [-lim, lim]
    return longint'($urandom_range(32'(2*lim))) - lim;
  endfunction

  // Whole-model reference: weights of the nine layers (layer_e numbering),
  // random initialisation, and the forward pass over one trial.
  class lfads_model;
    int T, NCH, NE, NL, ND, NF, DW, DF, WF;
    int WW = 16;             // weight width, limits the random weights
    int n_in[9], n_out[9];
    vec_t w[9], b[9];
    vec_t fac, logr;         // per time step, flat [t*NF + i] and [t*NCH + c]

    function new(int t, int nch, int ne, int nl, int nd, int nf, int dw, int df, int wf);
      T = t; NCH = nch; NE = ne; NL = nl; ND = nd; NF = nf; DW = dw; DF = df; WF = wf;
      n_in  = '{nch, ne, nch, ne, 2*ne, 1, nd, nd, nf};
      n_out = '{3*ne, 3*ne, 3*ne, 3*ne, nl, 3*nd, 3*nd, nf, nch};
    endfunction

    // Lecun-uniform-like weights, limit sqrt(3/fan_in); biases within +-0.1
    function void init_weights();
      for (int l = 0; l < 9; l++) begin
        longint lim = longint'($sqrt(3.0 / real'(n_in[l])) * real'(longint'(1) << WF));
        longint blim = longint'(0.1 * real'(longint'(1) << WF));
        longint wmax = (longint'(1) << (WW - 1)) - 1;
        if (lim > wmax) lim = wmax;
        w[l] = new[n_in[l] * n_out[l]];
        b[l] = new[n_out[l]];
        foreach (w[l][k]) w[l][k] = rnd_range(lim);
        foreach (b[l][k]) b[l][k] = rnd_range(blim);
      end
    endfunction

    // trial: flat [t*NCH + c]
    function void run(vec_t trial);
      vec_t sf = new[NE], sb = new[NE], x = new[NCH], hc = new[2*NE], s, z1 = new[1], f, r;
      for (int t = 0; t < T; t++) begin
        for (int c = 0; c < NCH; c++) x[c] = trial[t*NCH + c];
        sf = gru_step(w[0], b[0], w[1], b[1], x, sf, NCH, NE, DF, WF, DW);
        for (int c = 0; c < NCH; c++) x[c] = trial[(T-1-t)*NCH + c];
        sb = gru_step(w[2], b[2], w[3], b[3], x, sb, NCH, NE, DF, WF, DW);
      end
      for (int u = 0; u < NE; u++) begin
        hc[u] = sf[u];
        hc[NE + u] = sb[u];
      end
      s = dense(w[4], b[4], hc, 2*NE, NL, DF, WF, DW);
      fac = new[T*NF];
      logr = new[T*NCH];
      z1[0] = 0;
      for (int t = 0; t < T; t++) begin
        s = gru_step(w[5], b[5], w[6], b[6], z1, s, 1, ND, DF, WF, DW);
        f = dense(w[7], b[7], s, ND, NF, DF, WF, DW);
        r = dense(w[8], b[8], f, NF, NCH, DF, WF, DW);
        for (int i = 0; i < NF; i++) fac[t*NF + i] = f[i];
        for (int c = 0; c < NCH; c++) logr[t*NCH + c] = r[c];
      end
    endfunction
  endclass

endpackage
