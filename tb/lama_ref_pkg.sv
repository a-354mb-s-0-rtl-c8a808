// lama_ref_pkg: floating-point reference models used by the testbenches.
//
// They are written from the textbook definitions, independently of the RTL
// datapaths: the 16-PAM posterior mean and variance are summed over all 16
// symbols in the symbol domain, nearest points are found by a separate
// search, and reciprocals use real division. Units: PAM points are the odd
// integers -15..15; LLRs are natural-log ratios log P[bit=1]/P[bit=0].
package lama_ref_pkg;
  // Gray label bit k of PAM point a (odd, -15..15): a = x0*(8 - x1*(4 - x2*(2 - x3)))
  function automatic int ref_bit(input int a, input int k);
    int x0, x1, x2, x3, m;
    for (int b = 0; b < 16; b++) begin
      x0 = b[0] ? 1 : -1; x1 = b[1] ? 1 : -1; x2 = b[2] ? 1 : -1; x3 = b[3] ? 1 : -1;
      m = x0 * (8 - x1 * (4 - x2 * (2 - x3)));
      if (m == a) return (b >> k) & 1;
    end
    return 0;
  endfunction

  function automatic real rtanh(input real x);
    real e;
    if (x > 20.0)  return 1.0;
    if (x < -20.0) return -1.0;
    e = $exp(2.0 * x);
    return (e - 1.0) / (e + 1.0);
  endfunction

  // max-log channel LLR of bit k for observation mu at effective SINR rho
  function automatic real ref_chan_llr(input real mu, input real rho, input int k);
    real d0, d1, d;
    d0 = 1.0e30; d1 = 1.0e30;
    for (int a = -15; a <= 15; a += 2) begin
      d = (mu - a) * (mu - a);
      if (ref_bit(a, k) == 1) begin if (d < d1) d1 = d; end
      else                    begin if (d < d0) d0 = d; end
    end
    return rho * (d0 - d1);
  endfunction

  // quantise an LLR to 2 fractional bits and saturate to n bits (as code)
  function automatic int q_llr(input real l, input int n);
    real c;
    int lim;
    lim = 1 << (n - 1);
    c = l * 4.0;
    c = (c >= 0.0) ? c + 0.5 : c - 0.5;
    if (c > lim - 1) c = lim - 1;
    if (c < -lim)    c = -lim;
    return int'($rtoi(c));
  endfunction

  // symbol-domain mean and variance of one 16-PAM dimension given soft bits t_k = E[x_k]
  function automatic void ref_meanvar(input real t [4], output real mean, output real var2);
    real p, s1, s2;
    s1 = 0.0; s2 = 0.0;
    for (int a = -15; a <= 15; a += 2) begin
      p = 1.0;
      for (int k = 0; k < 4; k++)
        p = p * ((ref_bit(a, k) == 1) ? (1.0 + t[k]) / 2.0 : (1.0 - t[k]) / 2.0);
      s1 += a * p;
      s2 += a * a * p;
    end
    mean = s1;
    var2 = s2 - s1 * s1;
  endfunction

  // Posterior mean and variance of one 16-PAM dimension as the detector
  // defines them: max-log bit LLRs (8-bit, 2 fractional bits) plus prior, a
  // 7-bit tanh(L/2) rounded to 1/256, then the symbol-domain moments.
  // mu_code and rho_code carry 8 fractional bits, prior codes 2.
  function automatic void ref_pam(input int mu_code, input int rho_code, input int prior [4],
                                  output real mean, output real var2, output int lq [4]);
    real t [4];
    int l7;
    for (int k = 0; k < 4; k++) begin
      lq[k] = q_llr(ref_chan_llr(mu_code / 256.0, rho_code / 256.0, k), 24) + prior[k];
      if (lq[k] > 127)  lq[k] = 127;
      if (lq[k] < -128) lq[k] = -128;
      l7 = lq[k];
      if (l7 > 63)  l7 = 63;
      if (l7 < -64) l7 = -64;
      t[k] = $rtoi(256.0 * rtanh((l7 < 0 ? -l7 : l7) / 8.0) + 0.5) / 256.0;
      if (l7 < 0) t[k] = -t[k];
    end
    ref_meanvar(t, mean, var2);
  endfunction
endpackage
