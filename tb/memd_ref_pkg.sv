// memd_ref_pkg: floating-point reference model of the MEMD datapath, used by
// the testbenches to work out expected values independently of the RTL.
//
//   hamm_ref(k, i)      direction coefficient, recomputed from the Hammersley
//                       construction with real arithmetic and rounded to Q2.6
//   spline3(...)        three-knot natural cubic spline evaluated at t
//   sift_ref(...)       one sifting iteration on a frame of Q12.4 integers:
//                       exact integer projection, max/min search with the end
//                       samples as knots, sliding three-knot spline envelopes,
//                       mean of the 2K envelopes, h = x - mean (real units)
package memd_ref_pkg;

  function automatic real radinv(input int k, input int b);
    real r = 0.0, f = 1.0 / b;
    int  q = k;
    while (q > 0) begin
      r = r + f * (q % b);
      q = q / b;
      f = f / b;
    end
    return r;
  endfunction

  function automatic int hamm_ref(input int k, input int i);
    int  pr [4] = '{2, 3, 5, 7};
    real b [4];
    real th [3];
    real s, d [4], acc;
    for (int j = 0; j < 4; j++) b[j] = 2.0 * radinv(k + 1, pr[j]) - 1.0;
    for (int j = 0; j < 3; j++) begin
      acc = 0.0;
      for (int l = j + 1; l < 4; l++) acc = acc + b[l] * b[l];
      th[j] = $atan2($sqrt(acc), b[j]);
    end
    s = 1.0;
    for (int j = 0; j < 3; j++) begin
      d[j] = s * $cos(th[j]);
      s = s * $sin(th[j]);
    end
    d[3] = s;
    return $rtoi(d[i] * 64.0 + (d[i] >= 0 ? 0.5 : -0.5));
  endfunction

  // natural cubic spline through (x0,m0),(x1,m1),(x2,m2) evaluated at t
  function automatic real spline3(input real x0, x1, x2, m0, m1, m2, t);
    real h0 = x1 - x0, h1 = x2 - x1;
    real s0 = (m1 - m0) / h0, s1 = (m2 - m1) / h1;
    real k = 3.0 * (s1 - s0) / (2.0 * (h0 + h1));
    real dx;
    if (t < x1) begin
      dx = t - x0;
      return m0 + (s0 - h0 * k / 3.0) * dx + (k / (3.0 * h0)) * dx * dx * dx;
    end else begin
      dx = t - x1;
      return m1 + (s1 - 2.0 * h1 * k / 3.0) * dx + k * dx * dx - (k / (3.0 * h1)) * dx * dx * dx;
    end
  endfunction

  // envelope through knots (idx[], val[]) at time t with the sliding window
  function automatic real envelope(input int idx[$], input real val[$], input int t);
    int c = idx.size();
    int j;
    if (c == 2)
      return val[0] + (val[1] - val[0]) * (t - idx[0]) / real'(idx[1] - idx[0]);
    j = 0;
    while (j < c - 3 && t >= idx[j + 1]) j++;
    return spline3(idx[j], idx[j+1], idx[j+2], val[j], val[j+1], val[j+2], t);
  endfunction

  // one sifting iteration. x[n][i] are Q12.4 integers; h[n][i] in real units.
  // slides returns the number of distinct t at which some window slides.
  function automatic void sift_ref(input int N, input int K, input int L,
                                   input int x[][], output real h[][], output int slides);
    int  y [];
    int  idx [$];
    real val [$];
    real msum [][];
    bit  slide_at [];
    h = new[L];
    msum = new[L];
    slide_at = new[L];
    for (int n = 0; n < L; n++) begin
      h[n] = new[N];
      msum[n] = new[N];
      for (int i = 0; i < N; i++) msum[n][i] = 0.0;
    end
    y = new[L];
    for (int k = 0; k < K; k++) begin
      for (int n = 0; n < L; n++) begin
        int acc = 0;
        for (int i = 0; i < N; i++) acc += hamm_ref(k, i) * x[n][i];
        y[n] = acc >>> 2;
      end
      for (int mx = 0; mx < 2; mx++) begin
        idx.delete();
        idx.push_back(0);
        for (int n = 1; n < L - 1; n++) begin
          bit hit = mx == 0 ? (y[n] >= y[n-1] && y[n] >= y[n+1])
                            : (y[n] <= y[n-1] && y[n] <= y[n+1]);
          if (hit) idx.push_back(n);
        end
        idx.push_back(L - 1);
        for (int j = 1; j + 2 < idx.size(); j++) slide_at[idx[j]] = 1'b1;
        for (int i = 0; i < N; i++) begin
          val.delete();
          foreach (idx[q]) val.push_back(x[idx[q]][i] / 16.0);
          for (int n = 0; n < L; n++) msum[n][i] += envelope(idx, val, n);
        end
      end
    end
    slides = 0;
    for (int n = 0; n < L; n++) begin
      if (slide_at[n]) slides++;
      for (int i = 0; i < N; i++) h[n][i] = x[n][i] / 16.0 - msum[n][i] / (2.0 * K);
    end
  endfunction

endpackage
