// gnn_ref.svh: bit-exact reference model of the GraphSAGE network, written
// with 64-bit integers and plain loops, included inside the testbench modules
// to work out expected outputs independently of the RTL.
//
// Arithmetic rules: products and bias (shifted left by FRAC = 10) are summed
// exactly, shifted right by 10 with truncation towards minus infinity and
// saturated to 16 bits; means multiply the exact sum by round(2^16/n) and
// shift right by 16.
//
// Feature maps, weight matrices and bias vectors are flat dynamic arrays:
// feature (v, d) at v*MAXD + d, weight (o, i) at o*MAXD + i, bias o at o.

  localparam int MAXN = 10;
  localparam int MAXD = 128;
  localparam int MAXE = 45;

  typedef longint dyn_t [];
  typedef int     elist_t [MAXE];

  function automatic dyn_t zeros(int n);
    dyn_t a;
    a = new[n];
    foreach (a[k]) a[k] = 0;
    return a;
  endfunction

  function automatic longint rsat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic longint rrecip(int n);
    if (n == 0) return 0;
    return (65536 + longint'(n) / 2) / longint'(n);
  endfunction

  function automatic longint rmean(longint sum, int n);
    return rsat((sum * rrecip(n)) >>> 16);
  endfunction

  function automatic dyn_t ref_linear(dyn_t x, int nodes, int din, int dout,
                                      dyn_t w, dyn_t b);
    dyn_t y;
    y = zeros(MAXN * MAXD);
    for (int v = 0; v < nodes; v++)
      for (int o = 0; o < dout; o++) begin
        longint s;
        s = b[o] * 1024;
        for (int i = 0; i < din; i++) s += x[v*MAXD + i] * w[o*MAXD + i];
        y[v*MAXD + o] = rsat(s >>> 10);
      end
    return y;
  endfunction

  function automatic dyn_t ref_relu(dyn_t x);
    dyn_t y;
    y = x;
    foreach (y[k]) if (y[k] < 0) y[k] = 0;
    return y;
  endfunction

  function automatic dyn_t ref_mp(dyn_t h, int n_nodes, int n_edges,
                                  elist_t ea, elist_t eb, int dim);
    dyn_t sum, agg;
    int deg [MAXN];
    sum = zeros(MAXN * MAXD);
    agg = zeros(MAXN * MAXD);
    for (int v = 0; v < MAXN; v++) deg[v] = 0;
    for (int e = 0; e < n_edges && e < MAXE; e++) begin
      if (ea[e] < n_nodes && eb[e] < n_nodes) begin
        if (ea[e] == eb[e]) begin
          deg[ea[e]]++;
          for (int d = 0; d < dim; d++) sum[ea[e]*MAXD + d] += h[ea[e]*MAXD + d];
        end else begin
          deg[ea[e]]++;
          deg[eb[e]]++;
          for (int d = 0; d < dim; d++) begin
            sum[ea[e]*MAXD + d] += h[eb[e]*MAXD + d];
            sum[eb[e]*MAXD + d] += h[ea[e]*MAXD + d];
          end
        end
      end
    end
    for (int v = 0; v < MAXN; v++)
      for (int d = 0; d < dim; d++) agg[v*MAXD + d] = rmean(sum[v*MAXD + d], deg[v]);
    return agg;
  endfunction

  // Graph-level mean of the first n_nodes rows (result in row 0).
  function automatic dyn_t ref_meanpool(dyn_t x, int n_nodes, int dim);
    dyn_t g;
    int n;
    g = zeros(MAXN * MAXD);
    n = (n_nodes > MAXN) ? MAXN : n_nodes;
    for (int d = 0; d < dim; d++) begin
      longint s;
      s = 0;
      for (int v = 0; v < n; v++) s += x[v*MAXD + d];
      g[d] = rmean(s, n);
    end
    return g;
  endfunction

  function automatic longint isqrt(longint v);
    longint lo, hi, mid;
    lo = 0; hi = longint'(1) << 24;
    while (lo < hi) begin
      mid = (lo + hi + 1) / 2;
      if (mid * mid <= v) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction

  // Row-wise l2 normalisation: x / floor(sqrt(sum x^2)), through the
  // reciprocal floor(2^30 / norm) and a right shift by 20.
  function automatic dyn_t ref_l2(dyn_t x, int dim);
    dyn_t y;
    y = zeros(MAXN * MAXD);
    for (int v = 0; v < MAXN; v++) begin
      longint ss, nrm, rc;
      ss = 0;
      for (int d = 0; d < dim; d++) ss += x[v*MAXD + d] * x[v*MAXD + d];
      nrm = isqrt(ss);
      rc = (nrm == 0) ? 0 : (longint'(1) << 30) / nrm;
      for (int d = 0; d < dim; d++)
        y[v*MAXD + d] = (nrm == 0) ? 0 : rsat((x[v*MAXD + d] * rc) >>> 20);
    end
    return y;
  endfunction

  // One SAGE layer: y = ReLU(P * sat(R x + mean_nbr(N x)) + bp), with the
  // combination l2-normalised first when norm is set.
  function automatic dyn_t ref_sage(dyn_t x, int n_nodes, int n_edges,
                                    elist_t ea, elist_t eb, int din, int dout,
                                    dyn_t wr, dyn_t br, dyn_t wn, dyn_t bn,
                                    dyn_t wp, dyn_t bp, bit norm = 1'b0);
    dyn_t r, n, a, c;
    r = ref_linear(x, MAXN, din, dout, wr, br);
    n = ref_linear(x, MAXN, din, dout, wn, bn);
    a = ref_mp(n, n_nodes, n_edges, ea, eb, dout);
    c = zeros(MAXN * MAXD);
    foreach (c[k]) c[k] = rsat(r[k] + a[k]);
    if (norm) c = ref_l2(c, dout);
    return ref_relu(ref_linear(c, MAXN, dout, dout, wp, bp));
  endfunction

  // Random weight matrix with entries in [-wmax, wmax].
  function automatic dyn_t rand_w(int din, int dout, int wmax);
    dyn_t w;
    w = zeros(MAXD * MAXD);
    for (int o = 0; o < dout; o++)
      for (int i = 0; i < din; i++)
        w[o*MAXD + i] = longint'($urandom_range(2 * wmax)) - longint'(wmax);
    return w;
  endfunction

  // Random bias vector with entries in [-bmax, bmax].
  function automatic dyn_t rand_b(int dout, int bmax);
    dyn_t b;
    b = zeros(MAXD);
    for (int o = 0; o < dout; o++) b[o] = longint'($urandom_range(2 * bmax)) - longint'(bmax);
    return b;
  endfunction
