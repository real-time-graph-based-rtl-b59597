// pcn_ref_pkg: behavioural reference model of the point cloud network, for testbenches.
//
// Written as plain sequential algorithms on integer matrices (one row per point), without
// any of the pipelining, banking or hierarchical structure of the hardware, so that the
// testbenches can check the RTL against an independent formulation of the same maths:
// dense layers, k-nearest-neighbour search, exp(-d) weights, max/sum message aggregation
// and greedy condensation point selection. Number formats follow the RTL's documented
// conventions.
package pcn_ref_pkg;
  import pcn_pkg::*;

  typedef int row_t [$];
  typedef row_t mat_t [$];

  function automatic int sat(longint v, int w);
    longint mx, mn;
    mx = (64'sd1 <<< (w - 1)) - 1;
    mn = -(64'sd1 <<< (w - 1));
    if (v > mx) return int'(mx);
    if (v < mn) return int'(mn);
    return int'(v);
  endfunction

  // Floor division by 2^s for signed values.
  function automatic longint asr(longint v, int s);
    return v >>> s;
  endfunction

  function automatic mat_t dense_ref(mat_t x, int seed, int d_in, int d_out, int w, bit relu);
    mat_t y;
    foreach (x[p]) begin
      row_t r;
      for (int o = 0; o < d_out; o++) begin
        longint acc;
        int v;
        acc = longint'(bias_fn(seed, o, w)) * (64'sd1 << (w - 2));
        for (int i = 0; i < d_in; i++) acc += longint'(wgt_fn(seed, o, i, w)) * longint'(x[p][i]);
        v = sat(asr(acc, w - 2), w);
        if (relu && v < 0) v = 0;
        r.push_back(v);
      end
      y.push_back(r);
    end
    return y;
  endfunction

  function automatic longint sqdist(row_t a, row_t b);
    longint s;
    s = 0;
    foreach (a[k]) s += (longint'(a[k]) - longint'(b[k])) * (longint'(a[k]) - longint'(b[k]));
    return s;
  endfunction

  // Indices of the k nearest points j < nodes of point q (self included), nearest first,
  // equal distances ordered by index. Fewer than k if fewer points exist.
  function automatic row_t knn_ref(mat_t s, int nodes, int q, int k);
    row_t res;
    bit taken [];
    taken = new[s.size()];
    for (int n = 0; n < k; n++) begin
      int best;
      longint bd;
      best = -1;
      bd = 0;
      for (int j = 0; j < nodes; j++) begin
        longint d;
        if (taken[j]) continue;
        d = sqdist(s[q], s[j]);
        if (best < 0 || d < bd) begin
          best = j;
          bd = d;
        end
      end
      if (best < 0) break;
      taken[best] = 1'b1;
      res.push_back(best);
    end
    return res;
  endfunction

  // exp(-d) weight, 255 = 1.0; d has 2*frac fractional bits, quantised to 1/8.
  function automatic int exp_ref(longint d, int frac);
    longint q;
    real x;
    q = d / (64'sd1 << (2 * frac - 3));
    if (q > 255) q = 255;
    x = real'(q) / 8.0;
    return $rtoi(255.0 * $exp(-x) + 0.5);
  endfunction

  // GraVNetConv: row = {P, max over neighbours of w*F, sum over neighbours of w*F}.
  function automatic mat_t gravnet_ref(mat_t s, mat_t f, mat_t p, int nodes, int k, int w);
    mat_t y;
    foreach (s[q]) begin
      row_t nb, r;
      int mx [], sm [];
      longint acc [];
      nb = knn_ref(s, nodes, q, k);
      mx = new[f[0].size()];
      acc = new[f[0].size()];
      sm = new[f[0].size()];
      foreach (f[0][c]) begin
        acc[c] = 0;
        mx[c] = 0;
      end
      foreach (nb[n]) begin
        int wt;
        wt = exp_ref(sqdist(s[q], s[nb[n]]), w / 2);
        foreach (f[0][c]) begin
          int m;
          m = int'(asr(longint'(f[nb[n]][c]) * wt, 8));
          if (n == 0 || m > mx[c]) mx[c] = m;
          acc[c] += longint'(m);
        end
      end
      foreach (p[q][c]) r.push_back(p[q][c]);
      foreach (f[0][c]) r.push_back(mx[c]);
      foreach (f[0][c]) r.push_back(sat(acc[c], w));
      y.push_back(r);
    end
    return y;
  endfunction

  function automatic mat_t concat(mat_t a, mat_t b);
    mat_t y;
    foreach (a[p]) begin
      row_t r;
      r = a[p];
      foreach (b[p][c]) r.push_back(b[p][c]);
      y.push_back(r);
    end
    return y;
  endfunction

  // Condensation point selection. Feature 0 = beta, 1..cc = coordinates.
  // Candidates (beta > t_beta, existing) are visited by decreasing beta (then index);
  // an uncovered candidate becomes a seed and claims every uncovered existing point with
  // squared distance < t_d2.
  function automatic void cps_ref(mat_t x, int nodes, int cc, int t_beta, longint t_d2,
                                  output bit is_cp [], output bit assigned [], output int cid []);
    int n;
    bit used [];
    n = x.size();
    is_cp = new[n];
    assigned = new[n];
    cid = new[n];
    used = new[n];
    foreach (cid[i]) cid[i] = 0;
    forever begin
      int best;
      row_t cb, cj;
      best = -1;
      for (int i = 0; i < nodes; i++) begin
        if (used[i] || x[i][0] <= t_beta) continue;
        if (best < 0 || x[i][0] > x[best][0]) best = i;
      end
      if (best < 0) break;
      used[best] = 1'b1;
      if (assigned[best]) continue;
      is_cp[best] = 1'b1;
      for (int d = 1; d <= cc; d++) cb.push_back(x[best][d]);
      for (int j = 0; j < nodes; j++) begin
        cj = {};
        for (int d = 1; d <= cc; d++) cj.push_back(x[j][d]);
        if (!assigned[j] && sqdist(cb, cj) < t_d2) begin
          assigned[j] = 1'b1;
          cid[j] = best;
        end
      end
    end
  endfunction

endpackage
