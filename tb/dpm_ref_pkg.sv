// dpm_ref_pkg: behavioural reference model of the DPM algorithm for the
// testbenches. It is written independently of the RTL: coordinates come from
// the labelling formula, dual-path hop counts are found by walking the label
// routing function hop by hop (not by Manhattan distance), destinations are
// handled as sorted lists, and the merge loop follows the algorithm's steps.
package dpm_ref_pkg;

  localparam int N = 8;
  localparam int NN = N * N;

  function automatic int rx(int l);
    int y = l / N;
    return (y % 2 == 0) ? l % N : N - 1 - l % N;
  endfunction
  function automatic int ry(int l);
    return l / N;
  endfunction
  function automatic int rlab(int x, int y);
    return (y % 2 == 0) ? y * N + x : y * N + N - 1 - x;
  endfunction
  function automatic int iabs(int v);
    return v < 0 ? -v : v;
  endfunction
  function automatic int rdist(int a, int b);
    return iabs(rx(a) - rx(b)) + iabs(ry(a) - ry(b));
  endfunction

  // next hop of the label routing function: neighbour with the largest label
  // not above t (t > c) or the smallest label not below t (t < c)
  function automatic int rnext(int c, int t);
    int best, x, y, nb;
    int nbs[4];
    x = rx(c); y = ry(c);
    nbs[0] = (y < N - 1) ? rlab(x, y + 1) : -1;
    nbs[1] = (x < N - 1) ? rlab(x + 1, y) : -1;
    nbs[2] = (y > 0)     ? rlab(x, y - 1) : -1;
    nbs[3] = (x > 0)     ? rlab(x - 1, y) : -1;
    best = -1;
    foreach (nbs[i]) begin
      nb = nbs[i];
      if (nb < 0) continue;
      if (t > c && nb > c && nb <= t && (best < 0 || nb > best)) best = nb;
      if (t < c && nb < c && nb >= t && (best < 0 || nb < best)) best = nb;
    end
    return best;
  endfunction

  function automatic int rwalk(int a, int b);
    int h = 0;
    int c = a;
    while (c != b && h < 4 * NN) begin
      c = rnext(c, b);
      h++;
    end
    return h;
  endfunction

  function automatic int rpart(int s, int d);
    int sx = rx(s), sy = ry(s), x = rx(d), y = ry(d);
    if (x > sx && y > sy) return 0;
    if (x == sx && y > sy) return 1;
    if (x < sx && y > sy) return 2;
    if (x < sx && y == sy) return 3;
    if (x < sx && y < sy) return 4;
    if (x == sx && y < sy) return 5;
    if (x > sx && y < sy) return 6;
    if (x > sx && y == sy) return 7;
    return -1;
  endfunction

  // cost of a partition: returns 0 when empty
  function automatic void rcost(input int s, input logic [NN-1:0] m,
                                output int cost, output int rep, output bit dp);
    int ds[$];
    int hi[$], lo[$];
    int ct, cp, p, best;
    cost = 0; rep = 0; dp = 0;
    for (int i = 0; i < NN; i++) if (m[i]) ds.push_back(i);
    if (ds.size() == 0) return;
    best = 1 << 30;
    foreach (ds[i]) if (rdist(ds[i], s) < best) begin best = rdist(ds[i], s); rep = ds[i]; end
    ct = 0;
    foreach (ds[i]) ct += rdist(ds[i], rep);
    foreach (ds[i]) if (ds[i] > rep) hi.push_back(ds[i]); else if (ds[i] < rep) lo.push_back(ds[i]);
    hi.sort(); lo.rsort();
    cp = 0;
    p = rep; foreach (hi[i]) begin cp += rwalk(p, hi[i]); p = hi[i]; end
    p = rep; foreach (lo[i]) begin cp += rwalk(p, lo[i]); p = lo[i]; end
    dp = (cp < ct);
    cost = best + (dp ? cp : ct);
  endfunction

  function automatic logic [7:0] rcomps(int k);
    logic [7:0] c = '0;
    int len = (k < 8) ? 1 : (k < 16) ? 2 : 3;
    for (int j = 0; j < len; j++) c[(k + j) % 8] = 1'b1;
    return c;
  endfunction

  function automatic logic [NN-1:0] rcand(int s, logic [NN-1:0] m, int k);
    logic [NN-1:0] r = '0;
    logic [7:0] c = rcomps(k);
    for (int i = 0; i < NN; i++) if (m[i] && i != s && rpart(s, i) >= 0 && c[rpart(s, i)]) r[i] = 1'b1;
    return r;
  endfunction

  // the whole algorithm: returns the set of selected candidate indices
  function automatic logic [23:0] rdpm(int s, logic [NN-1:0] m);
    int c[24], a[24], r; bit d;
    logic [7:0] ne, cov, tk;
    logic [23:0] fin;
    int q, qa, sum;
    ne = '0;
    for (int p = 0; p < 8; p++) ne[p] = (rcand(s, m, p) != '0);
    for (int k = 0; k < 24; k++) rcost(s, rcand(s, m, k), c[k], r, d);
    for (int k = 0; k < 24; k++) begin
      a[k] = 0;
      if (k >= 8 && rcand(s, m, k) != '0) begin
        sum = 0;
        for (int p = 0; p < 8; p++) if (rcomps(k)[p]) sum += c[p];
        a[k] = (sum - c[k] > 0) ? sum - c[k] : 0;
      end
    end
    fin = '0; cov = '0;
    forever begin
      qa = 0; q = -1;
      for (int k = 8; k < 24; k++) if (a[k] > qa) begin qa = a[k]; q = k; end
      if (q < 0) break;
      fin[q] = 1'b1;
      tk = rcomps(q) & ne;
      cov |= tk;
      for (int k = 8; k < 24; k++) if ((rcomps(k) & tk) != 0) a[k] = 0;
    end
    for (int p = 0; p < 8; p++) if (ne[p] && !cov[p]) fin[p] = 1'b1;
    return fin;
  endfunction

endpackage
