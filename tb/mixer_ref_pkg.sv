// mixer_ref_pkg: behavioural reference model of the MLP-Mixer tagger for the
// testbenches.
//
// It reads the same network constants as the hardware (weights, biases and
// quantizer formats from mixer_pkg) but computes independently of the RTL:
// dense layers with ordinary multiplication instead of CSD shift-add, and the
// quantizer with real arithmetic (floor of value * 2^fb, clamp to
// [min, 2^ib - 2^-fb]) instead of bit masking. It also counts how often the
// quantizer's mechanisms fire, so testbenches can prove they were exercised.
// Tensors are flat dynamic arrays indexed p*nf + f.
package mixer_ref_pkg;
  import mixer_pkg::*;

  typedef longint vec_t[];

  int unsigned n_relu;    // negative value clamped by ReLU
  int unsigned n_sat;     // value saturated at its format's limit
  int unsigned n_pruned;  // element with zero bitwidth
  int unsigned n_skip_sat;// skip-adder saturation

  function automatic real pow2(int e);
    real r = 1.0;
    for (int i = 0; i < e; i++) r = r * 2.0;
    for (int i = 0; i > e; i--) r = r / 2.0;
    return r;
  endfunction

  function automatic longint ref_quant(longint a, int frac_in, qfmt_t f, bit relu);
    real v, q, maxv, minv;
    if (!f.keep) begin
      n_pruned++;
      return 0;
    end
    v = real'(a) / pow2(frac_in);
    if (relu && v < 0.0) begin
      n_relu++;
      return 0;
    end
    q    = $floor(v * pow2(int'(f.fb))) / pow2(int'(f.fb));
    maxv = pow2(int'(f.ib)) - pow2(-int'(f.fb));
    minv = relu ? 0.0 : -pow2(int'(f.ib));
    if (q > maxv) begin q = maxv; n_sat++; end
    if (q < minv) begin q = minv; n_sat++; end
    return longint'(q * pow2(ACT_F));
  endfunction

  // Dense layer on a vector: acc[o] = bias + sum_i weight(o,i) * x[i].
  function automatic vec_t ref_dense(layer_e l, vec_t x, int nout);
    vec_t y = new[nout];
    for (int o = 0; o < nout; o++) begin
      y[o] = longint'(bias(l, o));
      foreach (x[i]) y[o] += longint'(weight(l, o, i)) * x[i];
    end
    return y;
  endfunction

  // Input quantizer over an np x nf tensor.
  function automatic vec_t ref_input(vec_t x, int np, int nf);
    vec_t y = new[np*nf];
    for (int p = 0; p < np; p++)
      for (int f = 0; f < nf; f++)
        y[p*nf+f] = ref_quant(x[p*nf+f], ACT_F, act_fmt(L_IN, p, f, np), 1'b0);
    return y;
  endfunction

  // Feature MLP (MLP1/MLP3) over an np x nf tensor.
  function automatic vec_t ref_feature_mlp(vec_t x, int np, int nf, int nh,
                                           layer_e la, layer_e lb);
    vec_t y = new[np*nf];
    for (int p = 0; p < np; p++) begin
      vec_t xi = new[nf];
      vec_t h, o;
      for (int f = 0; f < nf; f++) xi[f] = x[p*nf+f];
      h = ref_dense(la, xi, nh);
      for (int k = 0; k < nh; k++) h[k] = ref_quant(h[k], DENSE_FRAC, act_fmt(la, p, k, np), 1'b1);
      o = ref_dense(lb, h, nf);
      for (int f = 0; f < nf; f++)
        y[p*nf+f] = ref_quant(o[f], DENSE_FRAC, act_fmt(lb, p, f, np), 1'b1);
    end
    return y;
  endfunction

  // Particle mixer (MLP2) over an np x nf tensor.
  function automatic vec_t ref_token_mlp(vec_t x, int np, int nf);
    vec_t y = new[np*nf];
    for (int f = 0; f < nf; f++) begin
      vec_t col = new[np];
      vec_t o;
      for (int p = 0; p < np; p++) col[p] = x[p*nf+f];
      o = ref_dense(L_M2, col, np);
      for (int p = 0; p < np; p++)
        y[p*nf+f] = ref_quant(o[p], DENSE_FRAC, act_fmt(L_M2, p, f, np), 1'b1);
    end
    return y;
  endfunction

  function automatic vec_t ref_skip(vec_t a, vec_t b);
    vec_t y = new[a.size()];
    foreach (a[i]) begin
      y[i] = a[i] + b[i];
      if (y[i] > 32767)  begin y[i] = 32767;  n_skip_sat++; end
      if (y[i] < -32768) begin y[i] = -32768; n_skip_sat++; end
    end
    return y;
  endfunction

  // Particle pooling (MLP4): np x nf tensor -> nf vector.
  function automatic vec_t ref_pool(vec_t x, int np, int nf);
    vec_t y = new[nf];
    for (int f = 0; f < nf; f++) begin
      vec_t col = new[np];
      vec_t o;
      for (int p = 0; p < np; p++) col[p] = x[p*nf+f];
      o = ref_dense(L_M4, col, 1);
      y[f] = ref_quant(o[0], DENSE_FRAC, act_fmt(L_M4, f, 0, np), 1'b1);
    end
    return y;
  endfunction

  // Head: nf -> nh -> nh -> nh -> nc.
  function automatic vec_t ref_head(vec_t x, int nh, int nc, int np);
    vec_t h = x;
    layer_e ls [4] = '{L_H0, L_H1, L_H2, L_H3};
    for (int s = 0; s < 4; s++) begin
      int n = (s == 3) ? nc : nh;
      h = ref_dense(ls[s], h, n);
      for (int k = 0; k < n; k++)
        h[k] = ref_quant(h[k], DENSE_FRAC, act_fmt(ls[s], 0, k, np), s != 3);
    end
    return h;
  endfunction

  // Whole tagger: raw np x nf inputs -> nc scores.
  function automatic vec_t ref_model(vec_t x, int np, int nf, int nh, int nc);
    vec_t xq, m1, m2, sk, m3, pl;
    xq = ref_input(x, np, nf);
    m1 = ref_feature_mlp(xq, np, nf, nh, L_M1A, L_M1B);
    m2 = ref_token_mlp(m1, np, nf);
    sk = ref_skip(xq, m2);
    m3 = ref_feature_mlp(sk, np, nf, nh, L_M3A, L_M3B);
    pl = ref_pool(m3, np, nf);
    return ref_head(pl, nh, nc, np);
  endfunction

  // Sub-vector v[off +: n].
  function automatic vec_t sub(vec_t v, int off, int n);
    vec_t y = new[n];
    for (int i = 0; i < n; i++) y[i] = v[off+i];
    return y;
  endfunction

  // Random activation: mostly within +-16, one in eight over the full 16-bit range.
  function automatic longint rand_act();
    if ($urandom_range(7) == 0) return longint'($signed(16'($urandom)));
    return longint'($urandom_range(8191)) - 4096;
  endfunction

endpackage
