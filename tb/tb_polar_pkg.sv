// Testbench helpers for the polar decoder tests: frozen-set construction,
// the polar encoder, BPSK over AWGN with quantisation, and a floating-point
// SC decoder used as the deterministic reference. All code lengths are
// handled with dynamic arrays; index 0 is u_1 / x_1 / y_1 of the usual
// 1-based notation.
package tb_polar_pkg;

  typedef bit  bitvec_t[];
  typedef real realvec_t[];
  typedef int  intvec_t[];

  // Frozen set of a natural-order code: Bhattacharyya parameters of the
  // binary erasure channel with erasure probability 0.5. Reading the index
  // from its most significant bit, a 0 takes z -> 2z - z^2 (f branch) and a
  // 1 takes z -> z^2 (g branch). The n-k largest are frozen.
  function automatic bitvec_t frozen_set(int n, int k);
    real z[];
    bitvec_t fr;
    int m;
    m = $clog2(n);
    z = new[n];
    fr = new[n];
    for (int i = 0; i < n; i++) begin
      z[i] = 0.5;
      for (int b = m - 1; b >= 0; b--) z[i] = ((i >> b) & 1) ? z[i] * z[i] : 2.0 * z[i] - z[i] * z[i];
      fr[i] = 0;
    end
    for (int f = 0; f < n - k; f++) begin
      int best;
      best = -1;
      for (int i = 0; i < n; i++)
        if (!fr[i] && (best < 0 || z[i] > z[best])) best = i;
      fr[best] = 1;
    end
    return fr;
  endfunction

  // x = u * F^(x m): x_c is the XOR of u_r over all r containing c's bits.
  function automatic bitvec_t encode(bitvec_t u);
    bitvec_t x;
    x = new[u.size()];
    for (int c = 0; c < u.size(); c++) begin
      x[c] = 0;
      for (int r = 0; r < u.size(); r++) if ((r & c) == c) x[c] ^= u[r];
    end
    return x;
  endfunction

  function automatic real rabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic real gauss();
    real a, b;
    a = (real'($urandom) + 1.0) / 4294967297.0;
    b = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(a)) * $cos(6.283185307179586 * b);
  endfunction

  // BPSK (0 -> +1) plus noise of variance sigma2, quantised to W-bit two's
  // complement codes with FRAC fractional bits. sigma2 = 0 gives the clean
  // signal; amp scales the transmitted amplitude.
  function automatic intvec_t channel(bitvec_t x, real sigma2, real amp, int w, int frac);
    intvec_t q;
    q = new[x.size()];
    for (int i = 0; i < x.size(); i++) begin
      real v;
      int c;
      v = (x[i] ? -amp : amp) + (sigma2 > 0.0 ? $sqrt(sigma2) * gauss() : 0.0);
      c = int'($floor(v * real'(1 << frac) + 0.5));
      if (c > (1 << (w - 1)) - 1) c = (1 << (w - 1)) - 1;
      if (c < -(1 << (w - 1))) c = -(1 << (w - 1));
      q[i] = c;
    end
    return q;
  endfunction

  // Exact SC decoding on log-likelihood ratios ln(P0/P1), recursive.
  function automatic real f_llr(real a, real b);
    real t;
    t = $tanh(a / 2.0) * $tanh(b / 2.0);
    if (t > 0.999999999999) t = 0.999999999999;
    if (t < -0.999999999999) t = -0.999999999999;
    return 2.0 * (0.5 * $ln((1.0 + t) / (1.0 - t)));
  endfunction

  // Decodes llr (length n) into u (length n) given frozen; returns x = uG.
  function automatic bitvec_t sc_rec(realvec_t llr, bitvec_t fr, ref bitvec_t u, input int off);
    int n;
    bitvec_t x;
    n = llr.size();
    x = new[n];
    if (n == 1) begin
      u[off] = fr[off] ? 1'b0 : (llr[0] < 0.0);
      x[0] = u[off];
    end else begin
      realvec_t l1, l2;
      bitvec_t a, b;
      l1 = new[n / 2];
      l2 = new[n / 2];
      for (int j = 0; j < n / 2; j++) l1[j] = f_llr(llr[j], llr[j + n / 2]);
      a = sc_rec(l1, fr, u, off);
      for (int j = 0; j < n / 2; j++) l2[j] = llr[j + n / 2] + (a[j] ? -llr[j] : llr[j]);
      b = sc_rec(l2, fr, u, off + n / 2);
      for (int j = 0; j < n / 2; j++) begin
        x[j] = a[j] ^ b[j];
        x[j + n / 2] = b[j];
      end
    end
    return x;
  endfunction

  // Reference decoder on the same scaled messages as the hardware:
  // ln(P0/P1) = 4*alpha*y for the quantised sample y.
  function automatic bitvec_t sc_decode(intvec_t q, bitvec_t fr, int frac, real alpha);
    realvec_t llr;
    bitvec_t u, x;
    llr = new[q.size()];
    u = new[q.size()];
    for (int i = 0; i < q.size(); i++) llr[i] = 4.0 * alpha * real'(q[i]) / real'(1 << frac);
    x = sc_rec(llr, fr, u, 0);
    return u;
  endfunction

endpackage
