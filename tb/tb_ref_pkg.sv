// tb_ref_pkg: bit-exact reference models of the LL-ViT datapath, written
// as plain integer software for the testbenches. They follow the arithmetic
// stated in each RTL module's header (thermometer code, LUT layers,
// conditional summation, ShiftMax, I-LayerNorm, attention with shift
// requantisation) but share no code with the RTL beyond the model constants
// of llvit_pkg (connection map, truth tables, thresholds).
package tb_ref_pkg;
  import llvit_pkg::*;

  typedef int vec_t[];

  function automatic int sat_i(longint v, int w);
    longint hi, lo;
    hi = (longint'(1) <<< (w - 1)) - 1;
    lo = -(longint'(1) <<< (w - 1));
    return int'(v > hi ? hi : (v < lo ? lo : v));
  endfunction

  function automatic longint isqrt_ref(longint v);
    longint r;
    if (v <= 0) return 0;
    r = longint'($floor($sqrt(real'(v))));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // I-LayerNorm of one row.
  function automatic vec_t layernorm_ref(vec_t x, vec_t g, vec_t b);
    vec_t y;
    longint s, q, v, rt, f, z, t;
    int d;
    d = x.size();
    y = new[d];
    s = 0; q = 0;
    foreach (x[i]) begin s += x[i]; q += longint'(x[i]) * x[i]; end
    v  = longint'(d) * q - s * s;
    rt = isqrt_ref(v);
    f  = (rt == 0) ? 64'd4194303 : (longint'(1) <<< 21) / rt;
    foreach (x[i]) begin
      z = ((longint'(d) * x[i] - s) * f) >>> 16;
      t = ((z * g[i]) >>> 6) + b[i];
      y[i] = sat_i(t, 8);
    end
    return y;
  endfunction

  // ShiftMax of one row (F fractional bits), probabilities x 256.
  function automatic vec_t shiftmax_ref(vec_t x, int fb);
    vec_t y;
    longint e[], sum, mx, xt, p, np, q, u, m, fct, pr;
    y = new[x.size()];
    e = new[x.size()];
    mx = x[0];
    foreach (x[i]) if (x[i] > mx) mx = x[i];
    sum = 0;
    foreach (x[i]) begin
      xt = x[i] - mx;
      p  = xt + (xt >>> 1) - (xt >>> 4);
      np = -p;
      q  = np >> fb;
      u  = np % (longint'(1) << fb);
      m  = ((longint'(1) << fb) - (u >> 1)) << (15 - fb);
      e[i] = (q >= 16) ? 0 : (m >> q);
      sum += e[i];
    end
    fct = (longint'(1) << 31) / sum;
    foreach (x[i]) begin
      pr   = (e[i] * fct) >> 23;
      y[i] = int'(pr > 255 ? 255 : pr);
    end
    return y;
  endfunction

  // Thermometer code of a row, channel c at [c*tb + t].
  function automatic vec_t thermo_ref(vec_t x, int tb);
    vec_t bits;
    bits = new[x.size() * tb];
    foreach (x[c]) for (int t = 0; t < tb; t++)
      bits[c*tb + t] = (x[c] > thermo_threshold(c, t, tb)) ? 1 : 0;
    return bits;
  endfunction

  function automatic vec_t lut_layer_ref(vec_t in_bits, int n_lut, int k, int layer);
    vec_t o;
    logic [63:0] tbl;
    int a;
    o = new[n_lut];
    for (int n = 0; n < n_lut; n++) begin
      a = 0;
      for (int j = 0; j < k; j++) a = a * 2 + in_bits[lut_conn(layer, n, j, in_bits.size())];
      tbl  = lut_init(layer, n);
      o[n] = int'(tbl[a]);
    end
    return o;
  endfunction

  // Channel mixer on one row; enc is flat, enc[j*D + i] (signed 4-bit values).
  // lid is the encoder-layer index, which selects that layer's LUT network.
  function automatic vec_t channel_mixer_ref(vec_t x, vec_t enc, int tb, int n1, int n2, int k,
                                             int lid = 0);
    vec_t th, l1, l2, y;
    th = thermo_ref(x, tb);
    l1 = lut_layer_ref(th, n1, k, 2 * lid + 1);
    l2 = lut_layer_ref(l1, n2, k, 2 * lid + 2);
    y  = new[x.size()];
    foreach (x[i]) begin
      y[i] = x[i];
      for (int j = 0; j < n2; j++) if (l2[j] != 0) y[i] += enc[j * x.size() + i];
    end
    return y;
  endfunction

  // C = A (m x kk) * B (kk x n), flat row-major.
  function automatic vec_t matmul_ref(vec_t a, vec_t b, int m, int kk, int n);
    vec_t c;
    c = new[m * n];
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) begin
      c[i*n + j] = 0;
      for (int t = 0; t < kk; t++) c[i*n + j] += a[i*kk + t] * b[t*n + j];
    end
    return c;
  endfunction

  // Token mixer: returns X + R (flat N x D). w = {Wq, Wk, Wv, Wo}, each D x D flat.
  function automatic vec_t token_mixer_ref(vec_t x, vec_t wq, vec_t wk, vec_t wv, vec_t wo,
                                           int n, int d, int h);
    vec_t q, k, v, o, r, s, pr, out;
    int dh;
    dh = d / h;
    q = matmul_ref(x, wq, n, d, d);
    k = matmul_ref(x, wk, n, d, d);
    v = matmul_ref(x, wv, n, d, d);
    foreach (q[i]) begin
      q[i] = sat_i(q[i] >>> 7, 8); k[i] = sat_i(k[i] >>> 7, 8); v[i] = sat_i(v[i] >>> 7, 8);
    end
    o = new[n * d];
    for (int hh = 0; hh < h; hh++) begin
      for (int i = 0; i < n; i++) begin
        s = new[n];
        for (int j = 0; j < n; j++) begin
          int acc;
          acc = 0;
          for (int t = 0; t < dh; t++) acc += q[i*d + hh*dh + t] * k[j*d + hh*dh + t];
          s[j] = sat_i(acc >>> 9, 16);
        end
        pr = shiftmax_ref(s, 4);
        for (int j = 0; j < dh; j++) begin
          int acc;
          acc = 0;
          for (int t = 0; t < n; t++) acc += pr[t] * v[t*d + hh*dh + j];
          o[i*d + hh*dh + j] = sat_i(acc >>> 8, 8);
        end
      end
    end
    r = matmul_ref(o, wo, n, d, d);
    out = new[n * d];
    foreach (r[i]) out[i] = x[i] + sat_i(r[i] >>> 7, 8);
    return out;
  endfunction

  // All weights of one encoder layer.
  typedef struct {
    vec_t wq, wk, wv, wo, g1, b1, g2, b2, enc;
  } layer_w_t;

  function automatic vec_t encoder_ref(vec_t x, layer_w_t w, int n, int d, int h,
                                       int tb, int n1, int n2, int k, int lid = 0);
    vec_t t, row, y, out;
    t   = token_mixer_ref(x, w.wq, w.wk, w.wv, w.wo, n, d, h);
    out = new[n * d];
    for (int i = 0; i < n; i++) begin
      row = new[d];
      for (int c = 0; c < d; c++) row[c] = t[i*d + c];
      y = layernorm_ref(row, w.g1, w.b1);
      y = channel_mixer_ref(y, w.enc, tb, n1, n2, k, lid);
      y = layernorm_ref(y, w.g2, w.b2);
      for (int c = 0; c < d; c++) out[i*d + c] = y[c];
    end
    return out;
  endfunction

  function automatic vec_t rand_vec(int n, int lo, int hi);
    vec_t v;
    v = new[n];
    foreach (v[i]) v[i] = lo + int'($urandom_range(hi - lo));
    return v;
  endfunction

  function automatic layer_w_t rand_layer_w(int d, int n2);
    layer_w_t w;
    w.wq = rand_vec(d*d, -40, 40);  w.wk = rand_vec(d*d, -40, 40);
    w.wv = rand_vec(d*d, -40, 40);  w.wo = rand_vec(d*d, -40, 40);
    w.g1 = rand_vec(d, 32, 100);    w.b1 = rand_vec(d, -10, 10);
    w.g2 = rand_vec(d, 32, 100);    w.b2 = rand_vec(d, -10, 10);
    w.enc = rand_vec(n2*d, -8, 7);
    return w;
  endfunction
endpackage
