// pn_ref_pkg -- reference arithmetic for the PointNet core testbenches.
//
// Plain-loop models of the layer equations, written independently of the RTL
// datapaths: FC y_i = sum_j W[i][j] x_j (exact) >>> FRAC + b_i, saturated;
// BN-ReLU y_i = max(0, ((x_i - mu_i) * s_i) >>> FRAC + beta_i), saturated.
package pn_ref_pkg;

  typedef int vec_t[];

  function automatic int sat(input logic signed [127:0] v, input int w);
    longint hi, lo;
    hi = (longint'(1) << (w - 1)) - 1;
    lo = -(longint'(1) << (w - 1));
    if (v > 128'(hi)) return int'(hi);
    if (v < 128'(lo)) return int'(lo);
    return int'(v[31:0]);
  endfunction

  // wgt is row-major [L][K]
  function automatic vec_t fc_ref(input vec_t x, input vec_t wgt, input vec_t bias,
                                  input int K, input int L, input int w, input int frac);
    vec_t y = new[L];
    for (int i = 0; i < L; i++) begin
      logic signed [127:0] s;
      s = 0;
      for (int j = 0; j < K; j++)
        s = s + 128'(longint'(x[j]) * longint'(wgt[i*K+j]));
      y[i] = sat((s >>> frac) + 128'(bias[i]), w);
    end
    return y;
  endfunction

  function automatic vec_t bn_ref(input vec_t x, input vec_t mu, input vec_t s, input vec_t beta,
                                  input int K, input int w, input int frac);
    vec_t y = new[K];
    for (int i = 0; i < K; i++) begin
      logic signed [127:0] p;
      longint d;
      d = longint'(x[i]) - longint'(mu[i]);
      p = 128'(d) * 128'(longint'(s[i]));
      p = (p >>> frac) + 128'(beta[i]);
      y[i] = (p < 0) ? 0 : sat(p, w);
    end
    return y;
  endfunction

  // uniform random value in [-mag, mag]
  function automatic int rnd(input int mag);
    return int'($urandom_range(2 * mag)) - mag;
  endfunction

endpackage
