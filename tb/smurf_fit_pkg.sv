// smurf_fit_pkg: computes SMURF weight tables in simulation, so the workload
// tests need no stored tables.
//
// A SMURF with M chain FSMs of N states, driven by input probabilities p_j,
// outputs on average
//   E[y](p) = sum_s w_s * prod_j P_N(i_j; p_j),
//   P_N(i; p) = t^i / sum_{k<N} t^k,  t = p / (1 - p),
// where s = sum_j i_j N^(j-1). The weights w_s in [0,1] are chosen to
// minimise the mean squared error to a target T(p) over the unit cube,
//   phi(w) = w' H w - 2 c' w,  H = mean_p P P',  c = mean_p T(p) P,
// evaluated on a tensor grid of G points per axis. On such a grid H is the
// Kronecker product of M copies of the one-axis matrix H1, which keeps the
// cost low. The bounded quadratic problem is solved by accelerated projected
// gradient descent (FISTA) with step 1/lambda_max(H).
package smurf_fit_pkg;

  typedef enum int {F_EUCLID = 0, F_HARTLEY = 1, F_TANH = 2, F_SWISH = 3,
                    F_SOFTMAX2 = 4, F_SOFTMAX3 = 5} func_e;

  function automatic string func_name(input func_e f);
    case (f)
      F_EUCLID:   return "euclidean sqrt(x1^2+x2^2)/sqrt(2)";
      F_HARTLEY:  return "hartley sin(x1)cas(x2)";
      F_TANH:     return "tanh(x1)";
      F_SWISH:    return "swish(x1)";
      F_SOFTMAX2: return "softmax e^x1/(e^x1+e^x2)";
      default:    return "softmax e^x1/(e^x1+e^x2+e^x3)";
    endcase
  endfunction

  // Target functions on [0,1]^M; x[0] is x_1.
  function automatic real target(input func_e f, input real x [3]);
    case (f)
      F_EUCLID:   return $sqrt(x[0]*x[0] + x[1]*x[1]) / $sqrt(2.0);
      F_HARTLEY:  return $sin(x[0]) * ($sin(x[1]) + $cos(x[1]));
      F_TANH:     return (($exp(x[0]) - $exp(-x[0])) / ($exp(x[0]) + $exp(-x[0])));
      F_SWISH:    return x[0] / (1.0 + $exp(-x[0]));
      F_SOFTMAX2: return $exp(x[0]) / ($exp(x[0]) + $exp(x[1]));
      default:    return $exp(x[0]) / ($exp(x[0]) + $exp(x[1]) + $exp(x[2]));
    endcase
  endfunction

  // Steady-state occupancy of an N-state chain driven with P(1) = p.
  function automatic void chain_probs(input int n, input real p, ref real pr []);
    real t, norm, tk;
    pr = new[n];
    if (p > 0.999999) p = 0.999999;
    if (p < 0.000001) p = 0.000001;
    t = p / (1.0 - p);
    norm = 0; tk = 1.0;
    for (int i = 0; i < n; i++) begin pr[i] = tk; norm += tk; tk *= t; end
    for (int i = 0; i < n; i++) pr[i] /= norm;
  endfunction

  // Expected output mean for weights w (as probabilities).
  function automatic real steady_mean(input int m, input int n, input real w [],
                                      input real p [3]);
    real pr [3][];
    real e, prod;
    int s, rem;
    for (int j = 0; j < m; j++) chain_probs(n, p[j], pr[j]);
    e = 0;
    for (s = 0; s < w.size(); s++) begin
      prod = w[s]; rem = s;
      for (int j = 0; j < m; j++) begin prod *= pr[j][rem % n]; rem /= n; end
      e += prod;
    end
    return e;
  endfunction

  // y = (H1 x ... x H1) v, applying H1 along every digit of the index.
  function automatic void kron_apply(input int m, input int n, input real h1 [],
                                     input real v [], ref real y []);
    real cur [], nxt [];
    int stride;
    cur = v;
    stride = 1;
    for (int j = 0; j < m; j++) begin
      nxt = new[cur.size()];
      for (int s = 0; s < cur.size(); s++) begin
        int d, base;
        real acc;
        d = (s / stride) % n;
        base = s - d * stride;
        acc = 0;
        for (int b = 0; b < n; b++) acc += h1[d*n + b] * cur[base + b*stride];
        nxt[s] = acc;
      end
      cur = nxt;
      stride *= n;
    end
    y = cur;
  endfunction

  // Fit N^M weights in [0,1] to target f; returns the mean absolute error of
  // the fitted steady-state output over the grid in fit_err.
  function automatic void fit(input int m, input int n, input func_e f, input int g,
                              input int iters, ref real w [], output real fit_err);
    int nw, npts;
    real h1 [], c [], y [], z [], w_old [];
    real pr [], lam, step, tk, tk1, rowsum;
    real x [3];
    real prs [3][];
    nw = 1; for (int j = 0; j < m; j++) nw *= n;
    npts = 1; for (int j = 0; j < m; j++) npts *= g;
    // one-axis Gram matrix
    h1 = new[n*n];
    foreach (h1[k]) h1[k] = 0;
    for (int k = 0; k < g; k++) begin
      chain_probs(n, (k + 0.5) / g, pr);
      for (int a = 0; a < n; a++) for (int b = 0; b < n; b++) h1[a*n+b] += pr[a] * pr[b] / g;
    end
    // right-hand side
    c = new[nw];
    foreach (c[k]) c[k] = 0;
    x[2] = 0; x[1] = 0;
    for (int q = 0; q < npts; q++) begin
      int r;
      real tv;
      r = q;
      for (int j = 0; j < m; j++) begin
        x[j] = ((r % g) + 0.5) / g; r /= g;
        chain_probs(n, x[j], prs[j]);
      end
      tv = target(f, x) / npts;
      for (int s = 0; s < nw; s++) begin
        real prod;
        int rem;
        prod = tv; rem = s;
        for (int j = 0; j < m; j++) begin prod *= prs[j][rem % n]; rem /= n; end
        c[s] += prod;
      end
    end
    // step from a Gershgorin bound on lambda_max(H1)^M
    lam = 0;
    for (int a = 0; a < n; a++) begin
      rowsum = 0;
      for (int b = 0; b < n; b++) rowsum += h1[a*n+b];
      if (rowsum > lam) lam = rowsum;
    end
    step = 1.0;
    for (int j = 0; j < m; j++) step /= lam;
    // FISTA
    w = new[nw];
    foreach (w[k]) w[k] = 0.5;
    z = w; tk = 1.0;
    for (int it = 0; it < iters; it++) begin
      kron_apply(m, n, h1, z, y);
      w_old = w;
      for (int s = 0; s < nw; s++) begin
        real v;
        v = z[s] - step * (y[s] - c[s]);
        w[s] = (v < 0.0) ? 0.0 : (v > 1.0) ? 1.0 : v;
      end
      tk1 = (1.0 + $sqrt(1.0 + 4.0 * tk * tk)) / 2.0;
      for (int s = 0; s < nw; s++) z[s] = w[s] + ((tk - 1.0) / tk1) * (w[s] - w_old[s]);
      tk = tk1;
    end
    // residual over the grid
    fit_err = 0;
    for (int q = 0; q < npts; q++) begin
      int r;
      real e;
      r = q;
      for (int j = 0; j < m; j++) begin x[j] = ((r % g) + 0.5) / g; r /= g; end
      e = steady_mean(m, n, w, x) - target(f, x);
      fit_err += ((e < 0) ? -e : e) / npts;
    end
  endfunction

endpackage
