// tb_ref_pkg: bit-exact software reference of the fixed-point network,
// written independently of the RTL for the testbenches.
//
// Numbers are held as plain ints carrying the 16-bit two's-complement value
// with 10 fractional bits. Narrowing follows the same rule as the hardware
// (drop fractional bits toward minus infinity, wrap to 16 bits). The
// activations are computed from the real functions ($exp) at the table grid
// point the input falls on, so they do not depend on the table files.
package tb_ref_pkg;

  localparam int W = 16;
  localparam int F = 10;

  typedef int vec_t[];

  function automatic int wrap(longint v);
    longint m;
    m = v & 64'hFFFF;
    if (m >= 32768) m = m - 65536;
    return int'(m);
  endfunction

  function automatic int fmul(int a, int b);
    return wrap((longint'(a) * longint'(b)) >>> F);
  endfunction

  function automatic int grid_index(int x, int step_log2);
    int idx;
    idx = (x >>> (F - step_log2)) + 512;
    if (idx < 0) idx = 0;
    if (idx > 1023) idx = 1023;
    return idx;
  endfunction

  // True when x lies outside the table range (the lookup clamps).
  function automatic bit clamps(int x, int step_log2);
    int idx;
    idx = (x >>> (F - step_log2)) + 512;
    return (idx < 0) || (idx > 1023);
  endfunction

  function automatic int sigmoid(int x);
    real xr, v;
    xr = -8.0 + 16.0 * real'(grid_index(x, 6)) / 1024.0;
    v  = 1.0 / (1.0 + $exp(-xr));
    return int'($floor(v * 1024.0));
  endfunction

  function automatic int tanh_f(int x);
    real xr, e, v;
    xr = -4.0 + 8.0 * real'(grid_index(x, 7)) / 1024.0;
    e  = $exp(2.0 * xr);
    v  = (e - 1.0) / (e + 1.0);
    return int'($floor(v * 1024.0));
  endfunction

  // y = W x + b, W indexed o*n_in + i.
  function automatic vec_t dense(vec_t w, vec_t b, vec_t x, int n_in, int n_out);
    vec_t y;
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint acc;
      acc = longint'(b[o]) <<< F;
      for (int i = 0; i < n_in; i++) acc += longint'(w[o*n_in + i]) * longint'(x[i]);
      y[o] = wrap(acc >>> F);
    end
    return y;
  endfunction

  // One LSTM update; returns {h, c} concatenated (2*n_h values).
  function automatic vec_t lstm_step(vec_t wk, vec_t bk, vec_t u, vec_t x, vec_t h, vec_t c,
                                     int n_in, int n_h);
    vec_t px, ph, zero, r;
    zero = new[4*n_h];
    foreach (zero[k]) zero[k] = 0;
    px = dense(wk, bk, x, n_in, 4*n_h);
    ph = dense(u, zero, h, n_h, 4*n_h);
    r  = new[2*n_h];
    for (int n = 0; n < n_h; n++) begin
      int gi, gf, gg, go, cn;
      gi = sigmoid(wrap(px[n] + ph[n]));
      gf = sigmoid(wrap(px[n_h+n] + ph[n_h+n]));
      gg = tanh_f(wrap(px[2*n_h+n] + ph[2*n_h+n]));
      go = sigmoid(wrap(px[3*n_h+n] + ph[3*n_h+n]));
      cn = wrap(fmul(gf, c[n]) + fmul(gi, gg));
      r[n_h+n] = cn;
      r[n]     = fmul(go, tanh_f(cn));
    end
    return r;
  endfunction

  function automatic vec_t gru_step(vec_t wk, vec_t bk, vec_t u, vec_t br, vec_t x, vec_t h,
                                    int n_in, int n_h);
    vec_t px, ph, r;
    px = dense(wk, bk, x, n_in, 3*n_h);
    ph = dense(u, br, h, n_h, 3*n_h);
    r  = new[n_h];
    for (int n = 0; n < n_h; n++) begin
      int z, rr, cand;
      z    = sigmoid(wrap(px[n] + ph[n]));
      rr   = sigmoid(wrap(px[n_h+n] + ph[n_h+n]));
      cand = tanh_f(wrap(px[2*n_h+n] + fmul(rr, ph[2*n_h+n])));
      r[n] = wrap(fmul(z, h[n]) + fmul(wrap(1024 - z), cand));
    end
    return r;
  endfunction

  // Softmax as the hardware defines it: exp(x - max) from a table over
  // [-16, 0] in steps of 1/64, a reciprocal table over [0, np) with 1024
  // entries, 14 fractional bits in both; evaluated here from $exp.
  function automatic vec_t softmax_ref(vec_t x);
    vec_t e, y;
    int mx, np, npl, sidx;
    longint sum, inv;
    real s;
    np = 1; npl = 0;
    while (np < x.size()) begin np *= 2; npl++; end
    e = new[x.size()]; y = new[x.size()];
    mx = x[0];
    foreach (x[k]) if (x[k] > mx) mx = x[k];
    sum = 0;
    foreach (x[k]) begin
      int idx;
      idx = (mx - x[k]) >>> (F - 6);
      if (idx > 1023) idx = 1023;
      e[k] = int'($floor($exp(-real'(idx) / 64.0) * 16384.0));
      sum += e[k];
    end
    sidx = int'(sum >>> (14 + npl - 10));
    if (sidx > 1023) sidx = 1023;
    s = (real'(sidx) + 0.5) * real'(np) / 1024.0;
    inv = longint'($floor(16384.0 / s));
    if (inv > 16384) inv = 16384;
    foreach (x[k]) y[k] = wrap((longint'(e[k]) * inv) >>> (28 - F));
    return y;
  endfunction

  typedef vec_t seq_t[];

  // Final hidden state of a recurrent layer run from a zero state.
  function automatic vec_t rnn_ref(bit is_gru, vec_t wk, vec_t bk, vec_t u, vec_t br, seq_t xs,
                                   int n_in, int n_h);
    vec_t h, c, r;
    h = new[n_h]; c = new[n_h];
    foreach (h[k]) begin h[k] = 0; c[k] = 0; end
    foreach (xs[t]) begin
      if (!is_gru) begin
        r = lstm_step(wk, bk, u, xs[t], h, c, n_in, n_h);
        for (int k = 0; k < n_h; k++) begin h[k] = r[k]; c[k] = r[n_h+k]; end
      end else begin
        h = gru_step(wk, bk, u, br, xs[t], h, n_in, n_h);
      end
    end
    return h;
  endfunction

  // Uniform random fixed-point value in [-lim, lim) given in LSBs.
  function automatic int rnd(int lim);
    return int'($urandom_range(0, 2*lim - 1)) - lim;
  endfunction

  function automatic vec_t rnd_vec(int n, int lim);
    vec_t v;
    v = new[n];
    foreach (v[k]) v[k] = rnd(lim);
    return v;
  endfunction

endpackage
