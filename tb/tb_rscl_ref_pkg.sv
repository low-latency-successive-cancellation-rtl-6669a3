// tb_rscl_ref_pkg: behavioural reference of the 2^K-bit reformulated SC list
// decoder (max-log), plus a channel model, for the end-to-end testbenches.
//
// It is written independently of the RTL: the stage-(m-K) values of a path
// are recomputed from the channel at every group by walking down the tree,
// with partial sums obtained by re-encoding the path's bits directly; the
// list is pruned by a full sort. Sizes up to NMAX = 1024, L up to LMAX = 8.
package tb_rscl_ref_pkg;
  localparam int NMAX = 1024;
  localparam int LMAX = 8;

  typedef int  llv_t [NMAX];
  typedef bit  uv_t  [NMAX];

  // x[0 +: len] = polar transform of u[lo +: len]
  function automatic void enc_seg(input uv_t u, input int lo, input int len, output uv_t x);
    x = '{default: 0};
    for (int i = 0; i < len; i++) x[i] = u[lo + i];
    for (int h = 1; h < len; h = h * 2)
      for (int i = 0; i < len; i++)
        if ((i & h) == 0) x[i] = x[i] ^ x[i + h];
  endfunction

  function automatic int mx(int a, int b); return (a > b) ? a : b; endfunction

  // LL pairs of the stage-(m-K) node of group grp for path u
  function automatic void leaf_ll(input llv_t c0, input llv_t c1, input uv_t u,
                                  input int n, input int d, input int grp,
                                  output llv_t l0, output llv_t l1);
    llv_t a0, a1;
    int size;
    a0 = c0; a1 = c1; size = n;
    for (int s = 1; s <= d; s++) begin
      int half, node;
      llv_t b0, b1;
      uv_t v;
      half = size / 2;
      node = grp >> (d - s);
      if ((node & 1) == 0) begin
        for (int j = 0; j < half; j++) begin
          b0[j] = mx(a0[j] + a0[j + half], a1[j] + a1[j + half]);
          b1[j] = mx(a0[j] + a1[j + half], a1[j] + a0[j + half]);
        end
      end else begin
        enc_seg(u, (node - 1) * half, half, v);
        for (int j = 0; j < half; j++) begin
          b0[j] = (v[j] ? a1[j] : a0[j]) + a0[j + half];
          b1[j] = (v[j] ? a0[j] : a1[j]) + a1[j + half];
        end
      end
      a0 = b0; a1 = b1; size = half;
    end
    l0 = a0; l1 = a1;
  endfunction

  // metric of giving the nb bits of a group the values pat (bit p = p-th bit)
  function automatic int group_metric(input llv_t l0, input llv_t l1, input int nb, input int pat);
    uv_t a, x;
    int m;
    a = '{default: 0};
    for (int p = 0; p < nb; p++) a[p] = pat[p];
    enc_seg(a, 0, nb, x);
    m = 0;
    for (int j = 0; j < nb; j++) m += x[j] ? l1[j] : l0[j];
    return m;
  endfunction

  // metric of a complete path u (value of the last group's candidate)
  function automatic int path_metric(input llv_t c0, input llv_t c1, input uv_t u, input int n, input int k);
    llv_t l0, l1;
    int nb, d, last, pat;
    nb = 1 << k; d = $clog2(n) - k; last = n / nb - 1;
    leaf_ll(c0, c1, u, n, d, last, l0, l1);
    pat = 0;
    for (int p = 0; p < nb; p++) pat |= int'(u[last * nb + p]) << p;
    return group_metric(l0, l1, nb, pat);
  endfunction

  // Full reference decode. tie = a tie at the list boundary occurred, so
  // the surviving set (and the result) may legitimately differ.
  task automatic decode(input llv_t c0, input llv_t c1, input uv_t info, input int n, input int k,
                        input int l, output int best_metric, output uv_t best_u, output bit tie);
    uv_t sp [LMAX];
    int  sm [LMAX];
    bit  sv [LMAX];
    int  nb, d;
    nb = 1 << k; d = $clog2(n) - k;
    tie = 0;
    sp = '{default: '{default: 0}};
    sm = '{default: 0};
    sv = '{default: 0};
    sv[0] = 1;
    for (int g = 0; g < n / nb; g++) begin
      int cm [$], cs [$], cp [$];
      uv_t np [LMAX];
      int nm [LMAX];
      bit nv [LMAX];
      for (int s = 0; s < l; s++) begin
        llv_t l0, l1;
        if (!sv[s]) continue;
        leaf_ll(c0, c1, sp[s], n, d, g, l0, l1);
        for (int pat = 0; pat < (1 << nb); pat++) begin
          bit ok;
          ok = 1;
          for (int p = 0; p < nb; p++) if (pat[p] && !info[g * nb + p]) ok = 0;
          if (!ok) continue;
          cm.push_back(group_metric(l0, l1, nb, pat)); cs.push_back(s); cp.push_back(pat);
        end
      end
      // selection sort by metric, largest first
      for (int i = 0; i < cm.size(); i++)
        for (int j = i + 1; j < cm.size(); j++)
          if (cm[j] > cm[i]) begin
            int t;
            t = cm[i]; cm[i] = cm[j]; cm[j] = t;
            t = cs[i]; cs[i] = cs[j]; cs[j] = t;
            t = cp[i]; cp[i] = cp[j]; cp[j] = t;
          end
      if (cm.size() > l && cm[l - 1] == cm[l]) tie = 1;
      nv = '{default: 0};
      for (int i = 0; i < l; i++) begin
        if (i < cm.size()) begin
          np[i] = sp[cs[i]];
          for (int p = 0; p < nb; p++) np[i][g * nb + p] = cp[i][p];
          nm[i] = cm[i];
          nv[i] = 1;
        end
      end
      sp = np; sm = nm; sv = nv;
    end
    best_metric = sm[0];
    best_u = sp[0];
  endtask

  // Information set: the k positions of smallest Bhattacharyya parameter for
  // a channel with parameter z0 (natural order: a 0 in an index bit, read
  // from the MSB, is the degraded branch 2z - z^2, a 1 the improved z^2).
  function automatic void info_set(input int n, input int k, input real z0, output uv_t info);
    real z [NMAX];
    int  idx [NMAX];
    int  m;
    m = $clog2(n);
    info = '{default: 0};
    for (int i = 0; i < n; i++) begin
      real t;
      t = z0;
      for (int b = m - 1; b >= 0; b--) t = ((i >> b) & 1) ? t * t : 2.0 * t - t * t;
      z[i] = t;
      idx[i] = i;
    end
    for (int i = 0; i < n; i++)
      for (int j = i + 1; j < n; j++)
        if (z[idx[j]] < z[idx[i]]) begin
          int t;
          t = idx[i]; idx[i] = idx[j]; idx[j] = t;
        end
    for (int i = 0; i < k; i++) info[idx[i]] = 1;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // Random message on the information set, BPSK over AWGN with deviation
  // sigma, quantised log-likelihoods LL(0), LL(1) <= 0 with |LLR| <= qmax.
  task automatic make_frame(input int n, input uv_t info, input real sigma, input real scale,
                            input int qmax, output uv_t u, output llv_t c0, output llv_t c1);
    uv_t x;
    u = '{default: 0};
    for (int i = 0; i < n; i++) if (info[i]) u[i] = 1'($urandom);
    enc_seg(u, 0, n, x);
    c0 = '{default: 0}; c1 = '{default: 0};
    for (int i = 0; i < n; i++) begin
      real y, llr;
      int q;
      y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      llr = 2.0 * y / (sigma * sigma) * scale;
      q = int'(llr);
      if (q > qmax) q = qmax;
      if (q < -qmax) q = -qmax;
      if (q >= 0) begin c0[i] = 0; c1[i] = -q; end
      else        begin c0[i] = q; c1[i] = 0;  end
    end
  endtask
endpackage
