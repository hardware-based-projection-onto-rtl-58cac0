// tb_ref_pkg: reference models for the projection testbenches.
//
// Two kinds of model, both written as plain sequential code and sharing no
// code with the RTL:
//   * fx_simplex / fx_parity: the fixed-point arithmetic of the hardware,
//     redone with integers (bubble sort, running sums, reciprocal
//     round(2^rf/i), floored thresholds, truncation and saturation). The
//     RTL must match them bit for bit.
//   * re_simplex / re_parity: the same algorithms in double precision.
//     They are the ideal results that the fixed-point output approximates.
//     re_vi_gap checks re_parity independently: for a convex hull of
//     vertices, p is the projection of v exactly when p is in the set and
//     (v - p).(e - p) <= 0 for every vertex e.
package tb_ref_pkg;

  function automatic int clog2i(int n);
    int k;
    k = 0;
    while ((1 << k) < n) k++;
    return k;
  endfunction

  // Descending sort of a copy.
  function automatic void sort_desc(ref longint a[]);
    longint t;
    for (int i = 0; i < a.size(); i++)
      for (int j = 0; j + 1 < a.size() - i; j++)
        if (a[j] < a[j+1]) begin
          t = a[j]; a[j] = a[j+1]; a[j+1] = t;
        end
  endfunction

  function automatic longint floor_shift(longint x, int sh);
    // Arithmetic right shift = floor(x / 2^sh).
    return x >>> sh;
  endfunction

  // Fixed-point simplex projection. v in units of 2^-f_in, result in units
  // of 2^-f_out, saturated to w_out-bit two's complement.
  function automatic void fx_simplex(input longint v[], input int f_in, input int f_out,
                                     input int w_out, input int rf, output longint w[]);
    int           d;
    longint       mu[];
    longint       thr[];
    longint       c, r, s_rho, x, maxv;
    int           rho;
    d   = v.size();
    mu  = new[d];
    thr = new[d];
    w   = new[d];
    foreach (v[i]) mu[i] = v[i];
    sort_desc(mu);
    c   = 0;
    rho = 0;
    for (int i = 0; i < d; i++) begin
      c      = c + mu[i];
      r      = ((longint'(1) << rf) + longint'((i + 1) / 2)) / longint'(i + 1);
      thr[i] = floor_shift((c - (longint'(1) << f_in)) * r, rf);
      if (mu[i] > thr[i]) rho = i;
    end
    s_rho = thr[rho];
    maxv  = (longint'(1) << (w_out - 1)) - 1;
    for (int i = 0; i < d; i++) begin
      x = v[i] - s_rho;
      if (x < 0) x = 0;
      if (f_out >= f_in) x = x << (f_out - f_in);
      else x = x >>> (f_in - f_out);
      if (x > maxv) x = maxv;
      w[i] = x;
    end
  endfunction

  // Fixed-point parity polytope projection, as the RTL computes it.
  function automatic void fx_parity(input longint v[], input int wid, input int f_in,
                                    input int f_out, output longint w[],
                                    output bit in_box, output bit flipped);
    int     d, imin, wt;
    longint one, half, s, x, maxv;
    longint vhat[], vt[], u[], dd[];
    bit     f[];
    d    = v.size();
    one  = longint'(1) << f_in;
    half = one / 2;
    vhat = new[d]; vt = new[d]; dd = new[d]; f = new[d]; w = new[d];
    wt   = 0;
    for (int i = 0; i < d; i++) begin
      vhat[i] = (v[i] < 0) ? 0 : ((v[i] > one) ? one : v[i]);
      f[i]    = (vhat[i] > half);
      dd[i]   = (vhat[i] > half) ? vhat[i] - half : half - vhat[i];
      wt     += int'(f[i]);
    end
    flipped = (wt % 2 == 0);
    if (flipped) begin
      imin = 0;
      for (int i = 1; i < d; i++) if (dd[i] < dd[imin]) imin = i;
      f[imin] = !f[imin];
    end
    s = 0;
    for (int i = 0; i < d; i++) begin
      vt[i] = f[i] ? one - v[i] : v[i];
      s    += f[i] ? one - vhat[i] : vhat[i];
    end
    in_box = (s >= one);
    fx_simplex(vt, f_in, f_in, wid + 2, f_in + clog2i(d) + 2, u);
    maxv = (longint'(1) << (wid - 1)) - 1;
    for (int i = 0; i < d; i++) begin
      x = in_box ? vhat[i] : (f[i] ? one - u[i] : u[i]);
      if (f_out >= f_in) x = x << (f_out - f_in);
      else x = x >>> (f_in - f_out);
      if (x > maxv) x = maxv;
      w[i] = x;
    end
  endfunction

  // Ideal simplex projection (Duchi et al., sort-based).
  function automatic void re_simplex(input real v[], output real w[]);
    int  d, rho;
    real mu[];
    real c, th, t, theta;
    d  = v.size();
    mu = new[d];
    w  = new[d];
    foreach (v[i]) mu[i] = v[i];
    for (int i = 0; i < d; i++)
      for (int j = 0; j + 1 < d - i; j++)
        if (mu[j] < mu[j+1]) begin
          t = mu[j]; mu[j] = mu[j+1]; mu[j+1] = t;
        end
    c = 0.0; rho = 0; theta = mu[0] - 1.0;
    for (int i = 0; i < d; i++) begin
      c  = c + mu[i];
      th = (c - 1.0) / real'(i + 1);
      if (mu[i] > th) begin
        rho   = i;
        theta = th;
      end
    end
    for (int i = 0; i < d; i++) w[i] = (v[i] - theta > 0.0) ? v[i] - theta : 0.0;
  endfunction

  // Ideal parity polytope projection (the cut-search / simplex algorithm).
  function automatic void re_parity(input real v[], output real w[]);
    int  d, wt, imin;
    real vh[], vt[], u[];
    bit  f[];
    real s, a, b;
    d  = v.size();
    vh = new[d]; vt = new[d]; f = new[d]; w = new[d];
    wt = 0;
    for (int i = 0; i < d; i++) begin
      vh[i] = (v[i] < 0.0) ? 0.0 : ((v[i] > 1.0) ? 1.0 : v[i]);
      f[i]  = (vh[i] > 0.5);
      wt   += int'(f[i]);
    end
    if (wt % 2 == 0) begin
      imin = 0;
      for (int i = 1; i < d; i++) begin
        a = (vh[i] > 0.5) ? vh[i] - 0.5 : 0.5 - vh[i];
        b = (vh[imin] > 0.5) ? vh[imin] - 0.5 : 0.5 - vh[imin];
        if (a < b) imin = i;
      end
      f[imin] = !f[imin];
    end
    s = 0.0;
    for (int i = 0; i < d; i++) begin
      vt[i] = f[i] ? 1.0 - v[i] : v[i];
      s    += (vt[i] < 0.0) ? 0.0 : ((vt[i] > 1.0) ? 1.0 : vt[i]);
    end
    if (s >= 1.0) begin
      foreach (vh[i]) w[i] = vh[i];
    end else begin
      re_simplex(vt, u);
      for (int i = 0; i < d; i++) w[i] = f[i] ? 1.0 - u[i] : u[i];
    end
  endfunction

  // Largest violation of the parity polytope's defining inequalities by p:
  // the box bounds and, for the odd set S nearest to p, the cut
  // sum_S p - sum_notS p <= |S| - 1.
  function automatic real re_pp_violation(input real p[]);
    int  d, wt, imin;
    bit  f[];
    real viol, lhs, a, b;
    d    = p.size();
    f    = new[d];
    viol = 0.0;
    wt   = 0;
    for (int i = 0; i < d; i++) begin
      if (-p[i] > viol) viol = -p[i];
      if (p[i] - 1.0 > viol) viol = p[i] - 1.0;
      f[i] = (p[i] > 0.5);
      wt  += int'(f[i]);
    end
    if (wt % 2 == 0) begin
      imin = 0;
      for (int i = 1; i < d; i++) begin
        a = (p[i] > 0.5) ? p[i] - 0.5 : 0.5 - p[i];
        b = (p[imin] > 0.5) ? p[imin] - 0.5 : 0.5 - p[imin];
        if (a < b) imin = i;
      end
      f[imin] = !f[imin];
      wt      = wt + (f[imin] ? 1 : -1);
    end
    lhs = 0.0;
    for (int i = 0; i < d; i++) lhs += f[i] ? p[i] : -p[i];
    if (lhs - real'(wt - 1) > viol) viol = lhs - real'(wt - 1);
    return viol;
  endfunction

  // max over even-weight vertices e of (v - p).(e - p); <= 0 at the projection.
  // Only used for d <= 16.
  function automatic real re_vi_gap(input real v[], input real p[]);
    int  d;
    real g, best;
    d    = v.size();
    best = -1.0e30;
    for (int m = 0; m < (1 << d); m++) begin
      if ($countones(m) % 2 == 0) begin
        g = 0.0;
        for (int i = 0; i < d; i++) g += (v[i] - p[i]) * (real'((m >> i) & 1) - p[i]);
        if (g > best) best = g;
      end
    end
    return best;
  endfunction

  // Standard normal sample (Box-Muller).
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // Uniform quantizer with saturation to a w-bit two's complement word.
  function automatic longint quant(real x, int wid, int frac);
    longint q, lim;
    q   = longint'($floor(x * real'(longint'(1) << frac) + 0.5));
    lim = longint'(1) << (wid - 1);
    if (q > lim - 1) q = lim - 1;
    if (q < -lim) q = -lim;
    return q;
  endfunction

endpackage
