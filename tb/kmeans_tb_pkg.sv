// kmeans_tb_pkg: reference model and helpers shared by the testbenches.
//
// Holds a data set split into quarters, builds a kd-tree per quarter the way
// the host software does (median split along the widest dimension, leaves of
// one point), and computes the expected result of the two-level clustering
// with plain Lloyd iterations (every point against every centroid), which
// the filtering engines must reproduce exactly.  It also packs node records
// in the layout the engines read.
package kmeans_tb_pkg;
  import kmeans_pkg::*;

  localparam int MAXP = 1024;      // points per quarter, at most
  localparam int MAXG = 4;
  localparam int MAXD = 16;
  localparam int MAXK = 32;
  localparam int MAXN = MAXG * 2 * MAXP;

  // Data set.
  int unsigned pts [MAXG][MAXP][MAXD];
  int          nq;                 // points per quarter
  int          ng, nd;

  // kd-tree nodes, all quarters in one table.
  int unsigned n_min [MAXN][MAXD];
  int unsigned n_max [MAXN][MAXD];
  longint      n_wgt [MAXN][MAXD];
  int          n_cnt [MAXN];
  int          n_left[MAXN], n_right[MAXN];
  bit          n_leaf[MAXN];
  int          n_used;
  int          root [MAXG];
  int          idx  [MAXP];

  // Dimension-generic record of a node.
  function automatic logic [node_width(DIM_DEF)-1:0] pack_node(int n);
    logic [node_width(DIM_DEF)-1:0] r;
    int pos;
    r = '0;
    pos = 0;
    for (int d = 0; d < DIM_DEF; d++) begin r[pos +: COORD_W] = coord_t'(n_min[n][d]); pos += COORD_W; end
    for (int d = 0; d < DIM_DEF; d++) begin r[pos +: COORD_W] = coord_t'(n_max[n][d]); pos += COORD_W; end
    for (int d = 0; d < DIM_DEF; d++) begin r[pos +: ACC_W]   = acc_t'(n_wgt[n][d]);   pos += ACC_W;   end
    r[pos +: CNT_W]  = cnt_t'(n_cnt[n]);   pos += CNT_W;
    r[pos +: ADDR_W] = addr_t'(n_right[n]); pos += ADDR_W;
    r[pos +: ADDR_W] = addr_t'(n_left[n]);  pos += ADDR_W;
    r[pos]           = n_leaf[n];
    return r;
  endfunction

  function automatic int build(int g, int lo, int hi);
    int n, wd, best, l, r;
    int unsigned mn, mx;
    n = n_used++;
    if (hi - lo == 1) begin
      for (int d = 0; d < nd; d++) begin
        n_min[n][d] = pts[g][idx[lo]][d];
        n_max[n][d] = pts[g][idx[lo]][d];
        n_wgt[n][d] = pts[g][idx[lo]][d];
      end
      n_cnt[n] = 1; n_leaf[n] = 1; n_left[n] = 0; n_right[n] = 0;
      return n;
    end
    // widest dimension
    wd = 0; best = -1;
    for (int d = 0; d < nd; d++) begin
      mn = '1; mx = 0;
      for (int i = lo; i < hi; i++) begin
        if (pts[g][idx[i]][d] < mn) mn = pts[g][idx[i]][d];
        if (pts[g][idx[i]][d] > mx) mx = pts[g][idx[i]][d];
      end
      if (int'(mx - mn) > best) begin best = int'(mx - mn); wd = d; end
    end
    // insertion sort of the range along wd
    for (int i = lo + 1; i < hi; i++) begin
      int t, j;
      t = idx[i]; j = i - 1;
      while (j >= lo && pts[g][idx[j]][wd] > pts[g][t][wd]) begin idx[j+1] = idx[j]; j--; end
      idx[j+1] = t;
    end
    l = build(g, lo, (lo + hi) / 2);
    r = build(g, (lo + hi) / 2, hi);
    n_leaf[n] = 0; n_left[n] = l; n_right[n] = r;
    n_cnt[n] = n_cnt[l] + n_cnt[r];
    for (int d = 0; d < nd; d++) begin
      n_min[n][d] = (n_min[l][d] < n_min[r][d]) ? n_min[l][d] : n_min[r][d];
      n_max[n][d] = (n_max[l][d] > n_max[r][d]) ? n_max[l][d] : n_max[r][d];
      n_wgt[n][d] = n_wgt[l][d] + n_wgt[r][d];
    end
    return n;
  endfunction

  function automatic void build_all();
    n_used = 0;
    for (int g = 0; g < ng; g++) begin
      for (int i = 0; i < nq; i++) idx[i] = i;
      root[g] = build(g, 0, nq);
    end
  endfunction

  // Data: blobs around random centres, each point a centre plus noise.
  function automatic void gen_data(int g_n, int n_per, int d_n, int blobs, int spread);
    int unsigned c [MAXK][MAXD];
    ng = g_n; nq = n_per; nd = d_n;
    for (int b = 0; b < blobs; b++)
      for (int d = 0; d < nd; d++) c[b][d] = 32'h10000 + ($urandom % 32'h400000);
    for (int g = 0; g < ng; g++)
      for (int i = 0; i < nq; i++) begin
        int b;
        b = int'($urandom % blobs);
        for (int d = 0; d < nd; d++)
          pts[g][i][d] = c[b][d] + ($urandom % spread) + ($urandom % spread) - spread;
      end
  endfunction

  function automatic longint l1(int unsigned a [MAXD], int unsigned b [MAXD]);
    longint s;
    s = 0;
    for (int d = 0; d < nd; d++) s += (a[d] > b[d]) ? longint'(a[d] - b[d]) : longint'(b[d] - a[d]);
    return s;
  endfunction

  // ---- reference two-level clustering ----
  int unsigned cent [MAXG][MAXK][MAXD];   // level-1 centroids, then shared in [0]
  longint      sw   [MAXG][MAXK][MAXD];
  longint      sc   [MAXG][MAXK];
  int          it1  [MAXG];
  int          it2;
  int          ties;
  longint      fin_cnt [MAXK];

  // One Lloyd pass of quarter g against centroid set cs; sums into sw/sc[slot].
  function automatic void pass(int g, int cs, int kact, int slot, bit clear);
    if (clear)
      for (int k = 0; k < kact; k++) begin
        sc[slot][k] = 0;
        for (int d = 0; d < nd; d++) sw[slot][k][d] = 0;
      end
    for (int i = 0; i < nq; i++) begin
      longint best, dd;
      int bk;
      best = -1; bk = 0;
      for (int k = 0; k < kact; k++) begin
        dd = l1(pts[g][i], cent[cs][k]);
        if (best < 0 || dd < best) begin best = dd; bk = k; end
      end
      for (int k = 0; k < kact; k++)
        if (k != bk && l1(pts[g][i], cent[cs][k]) == best) ties++;
      sc[slot][bk]++;
      for (int d = 0; d < nd; d++) sw[slot][bk][d] += pts[g][i][d];
    end
  endfunction

  function automatic bit update(int slot, int cs, int kact);
    bit ch;
    ch = 0;
    for (int k = 0; k < kact; k++)
      if (sc[slot][k] != 0)
        for (int d = 0; d < nd; d++) begin
          int unsigned v;
          v = int'(sw[slot][k][d] / sc[slot][k]);
          if (v != cent[cs][k][d]) ch = 1;
          cent[cs][k][d] = v;
        end
    return ch;
  endfunction

  function automatic void reference(int kact, int max_iter);
    ties = 0;
    for (int g = 0; g < ng; g++) begin
      bit ch;
      it1[g] = 0;
      do begin
        pass(g, g, kact, g, 1);
        ch = update(g, g, kact);
        it1[g]++;
      end while (ch && it1[g] < max_iter);
    end
    // combine: cluster k of quarter 0 with the nearest cluster of the others
    begin
      longint mw [MAXK][MAXD];
      longint mc [MAXK];
      for (int k = 0; k < kact; k++) begin
        mc[k] = sc[0][k];
        for (int d = 0; d < nd; d++) mw[k][d] = sw[0][k][d];
        for (int g = 1; g < ng; g++) begin
          longint best, dd;
          int bj;
          best = -1; bj = 0;
          for (int j = 0; j < kact; j++) begin
            dd = l1(cent[0][k], cent[g][j]);
            if (best < 0 || dd < best) begin best = dd; bj = j; end
          end
          for (int j = 0; j < kact; j++)
            if (j != bj && l1(cent[0][k], cent[g][j]) == best) ties++;
          mc[k] += sc[g][bj];
          for (int d = 0; d < nd; d++) mw[k][d] += sw[g][bj][d];
        end
      end
      for (int k = 0; k < kact; k++) begin
        sc[0][k] = mc[k];
        for (int d = 0; d < nd; d++) sw[0][k][d] = mw[k][d];
      end
      void'(update(0, 0, kact));
    end
    // level 2
    it2 = 0;
    begin
      bit ch;
      do begin
        for (int g = 0; g < ng; g++) pass(g, 0, kact, 0, g == 0);
        ch = update(0, 0, kact);
        it2++;
      end while (ch && it2 < max_iter);
    end
    for (int k = 0; k < kact; k++) fin_cnt[k] = sc[0][k];
  endfunction

endpackage
