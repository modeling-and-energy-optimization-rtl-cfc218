// oms_ref_pkg: independent reference model of the offset min-sum computations, written
// directly from the decoding algorithm (not from the RTL structure), for the testbenches.
//
// All messages are integers saturated to +-(2^(W-1)-1); belief totals are exact sums. cn_update is one check node
// update: two smallest magnitudes, offset C floored at zero, product of signs, and the
// second minimum for the input that holds the first one. qc_addr gives the variable node
// of block column k that row r of layer l connects to in the decoder's array code.
package oms_ref_pkg;

  localparam int MAXN = 64;

  typedef int vec_t[MAXN];

  function automatic int sat(int v, int w);
    int m = (1 << (w - 1)) - 1;
    if (v > m) return m;
    if (v < -m) return -m;
    return v;
  endfunction

  function automatic int iabs(int v);
    return v < 0 ? -v : v;
  endfunction

  function automatic vec_t cn_update(vec_t mu, int n, int c);
    vec_t lam;
    int m1, m2, m1o, m2o, st, si;
    m1 = 1 << 30;
    m2 = 1 << 30;
    st = 1;
    for (int i = 0; i < n; i++) begin
      if (mu[i] < 0) st = -st;
      if (iabs(mu[i]) < m1) begin
        m2 = m1;
        m1 = iabs(mu[i]);
      end else if (iabs(mu[i]) < m2) begin
        m2 = iabs(mu[i]);
      end
    end
    m1o = (m1 > c) ? m1 - c : 0;
    m2o = (m2 > c) ? m2 - c : 0;
    for (int i = 0; i < MAXN; i++) lam[i] = 0;
    for (int i = 0; i < n; i++) begin
      si = (mu[i] < 0) ? -st : st;
      lam[i] = si * ((iabs(mu[i]) == m1) ? m2o : m1o);
    end
    return lam;
  endfunction

  function automatic int qc_addr(int l, int k, int r, int z);
    return (r + (l * k) % z) % z;
  endfunction

  // Gaussian sample (Box-Muller) from two uniforms.
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // Channel belief mu = round(alpha * y / sigma^2), y = 1 + sigma * n, saturated.
  function automatic int channel_llr(real alpha, real sigma, int w);
    real y = 1.0 + sigma * gauss();
    real v = alpha * y / (sigma * sigma);
    int  q = (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    return sat(q, w);
  endfunction

endpackage
