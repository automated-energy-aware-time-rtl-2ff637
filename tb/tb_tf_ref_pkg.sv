// tb_tf_ref_pkg: bit-exact integer reference of the Transformer datapath for
// the testbenches. Tensors are flat int arrays, row-major (token*width +
// channel). Arithmetic helpers come from tb_ref_pkg.
package tb_tf_ref_pkg;
  import tb_ref_pkg::*;

  typedef int vec_t [];

  // Y[s][o] = act(rq(b[o]*16 + sum_i W[o*IN+i] X[s*IN+i]) (+ R[s*OUT+o]))
  function automatic vec_t r_seq_linear(vec_t x, int n, int in_d, int out_d,
                                        vec_t w, vec_t b, vec_t r, bit use_r, bit relu);
    vec_t y = new[n*out_d];
    for (int s = 0; s < n; s++)
      for (int o = 0; o < out_d; o++) begin
        longint acc = longint'(b[o]) * 16;
        int v;
        for (int i = 0; i < in_d; i++) acc += longint'(w[o*in_d+i]) * x[s*in_d+i];
        v = r_rq(acc);
        if (use_r) v = r_add(v, r[s*out_d+o]);
        if (relu && v < 0) v = 0;
        y[s*out_d+o] = v;
      end
    return y;
  endfunction

  function automatic vec_t r_pe(int n, int d);
    vec_t t = new[n*d];
    for (int p = 0; p < n; p++)
      for (int c = 0; c < d; c++) begin
        real ang = real'(p) / (10000.0 ** (real'(c - c % 2) / real'(d)));
        real v = (c % 2 == 0) ? $sin(ang) : $cos(ang);
        t[p*d+c] = $rtoi($floor(v * 16.0 + 0.5));
      end
    return t;
  endfunction

  function automatic vec_t r_attention(vec_t q, vec_t k, vec_t v, int n, int d);
    vec_t a = new[n*d];
    longint inv = longint'($rtoi($floor(65536.0 / $sqrt(real'(d)) + 0.5)));
    for (int s = 0; s < n; s++) begin
      int sc [] = new[n];
      longint e [] = new[n];
      int pr [] = new[n];
      int mx;
      longint sum = 0, recip;
      for (int j = 0; j < n; j++) begin
        longint acc = 0;
        for (int i = 0; i < d; i++) acc += longint'(q[s*d+i]) * k[j*d+i];
        sc[j] = r_sat(r_floor_shift(acc * inv + (longint'(1) << 19), 20));
        if (j == 0 || sc[j] > mx) mx = sc[j];
      end
      for (int j = 0; j < n; j++) begin
        longint z = sc[j] - mx;
        longint u = r_floor_shift(z * 23637, 14);
        longint ui = r_floor_shift(u, 4);
        longint uf = u - 16*ui;
        e[j] = (-ui >= 16) ? 0 : (((16 + uf) << 11) >> (-ui));
        sum += e[j];
      end
      recip = (longint'(1) << 31) / sum;
      for (int j = 0; j < n; j++) begin
        longint pv = (e[j] * recip + (longint'(1) << 22)) >> 23;
        pr[j] = (pv > 255) ? 255 : int'(pv);
      end
      for (int o = 0; o < d; o++) begin
        longint acc = 0;
        for (int j = 0; j < n; j++) acc += longint'(pr[j]) * v[j*d+o];
        a[s*d+o] = r_sat(r_floor_shift(acc + 128, 8));
      end
    end
    return a;
  endfunction

  function automatic vec_t r_bn(vec_t x, int n, int d, vec_t g, vec_t h);
    vec_t y = new[n*d];
    for (int s = 0; s < n; s++)
      for (int c = 0; c < d; c++) y[s*d+c] = r_add(r_mul(g[c], x[s*d+c]), h[c]);
    return y;
  endfunction

  function automatic vec_t r_gap(vec_t x, int n, int d);
    vec_t p = new[d];
    longint rn = ((longint'(1) << 16) + n/2) / n;
    for (int c = 0; c < d; c++) begin
      longint sum = 0;
      for (int s = 0; s < n; s++) sum += x[s*d+c];
      p[c] = r_sat(r_floor_shift(sum * rn + (longint'(1) << 15), 16));
    end
    return p;
  endfunction

  function automatic vec_t r_slice(vec_t a, int off, int len);
    vec_t r = new[len];
    for (int i = 0; i < len; i++) r[i] = a[off+i];
    return r;
  endfunction

  // Whole model from the flat parameter vector (map of transformer_model)
  function automatic int r_transformer(vec_t p, vec_t x, int n, int d);
    int o_att = 2*d, o_bn1 = o_att + 4*(d*d+d), o_ffn = o_bn1 + 2*d;
    int o_bn2 = o_ffn + 8*d*d + 5*d, o_out = o_bn2 + 2*d;
    vec_t e, q, k, v, a, r1, x1, hd, r2, x2, pooled, none;
    longint acc;
    e  = r_seq_linear(x, n, 1, d, r_slice(p, 0, d), r_slice(p, d, d), r_pe(n, d), 1, 0);
    q  = r_seq_linear(e, n, d, d, r_slice(p, o_att, d*d),             r_slice(p, o_att + d*d, d), none, 0, 0);
    k  = r_seq_linear(e, n, d, d, r_slice(p, o_att + (d*d+d), d*d),   r_slice(p, o_att + (d*d+d) + d*d, d), none, 0, 0);
    v  = r_seq_linear(e, n, d, d, r_slice(p, o_att + 2*(d*d+d), d*d), r_slice(p, o_att + 2*(d*d+d) + d*d, d), none, 0, 0);
    a  = r_attention(q, k, v, n, d);
    r1 = r_seq_linear(a, n, d, d, r_slice(p, o_att + 3*(d*d+d), d*d), r_slice(p, o_att + 3*(d*d+d) + d*d, d), e, 1, 0);
    x1 = r_bn(r1, n, d, r_slice(p, o_bn1, d), r_slice(p, o_bn1 + d, d));
    hd = r_seq_linear(x1, n, d, 4*d, r_slice(p, o_ffn, 4*d*d), r_slice(p, o_ffn + 4*d*d, 4*d), none, 0, 1);
    r2 = r_seq_linear(hd, n, 4*d, d, r_slice(p, o_ffn + 4*d*d + 4*d, 4*d*d), r_slice(p, o_ffn + 8*d*d + 4*d, d), x1, 1, 0);
    x2 = r_bn(r2, n, d, r_slice(p, o_bn2, d), r_slice(p, o_bn2 + d, d));
    pooled = r_gap(x2, n, d);
    acc = longint'(p[o_out + d]) * 16;
    for (int c = 0; c < d; c++) acc += longint'(p[o_out + c]) * pooled[c];
    return r_rq(acc);
  endfunction

  // Random flat Transformer parameters: weights up to +-wm, biases up to
  // +-bm, BatchNorm scales around 1.0 (16) and shifts up to +-bm.
  function automatic vec_t r_rand_transformer(int d, int wm, int bm);
    int np = 12*d*d + 16*d + 1;
    int o_att = 2*d, o_bn1 = o_att + 4*(d*d+d), o_ffn = o_bn1 + 2*d;
    int o_bn2 = o_ffn + 8*d*d + 5*d;
    vec_t p = new[np];
    for (int i = 0; i < np; i++) p[i] = r_rand(wm);
    for (int i = 0; i < d; i++) p[i] = r_rand(40);          // input weights
    for (int i = d; i < 2*d; i++) p[i] = r_rand(bm);
    for (int b = 0; b < 4; b++)
      for (int i = 0; i < d; i++) p[o_att + b*(d*d+d) + d*d + i] = r_rand(bm);
    foreach (p[i]) ;
    for (int i = 0; i < d; i++) begin
      p[o_bn1 + i] = 8 + int'($urandom_range(16)); p[o_bn1 + d + i] = r_rand(bm);
      p[o_bn2 + i] = 8 + int'($urandom_range(16)); p[o_bn2 + d + i] = r_rand(bm);
    end
    return p;
  endfunction
endpackage
