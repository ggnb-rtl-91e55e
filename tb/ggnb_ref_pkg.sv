// ggnb_ref_pkg -- double-precision reference of the GGNB detector, for the
// end-to-end testbenches.
//
// `window_features` turns one window's ID sequence into the nine features
// (same graph rules and table limits as the hardware: distinct IDs are
// vertices, consecutive pairs are edges, repeated pairs count once, repeated
// IDs give self-loops;
// damped PageRank with d = 0.85 iterated to convergence).  `gnb_model` is a
// Gaussian naive Bayes trainer and scorer playing the offline host: it
// accumulates labelled feature vectors, fits priors, means and variances
// (with a small variance floor), and produces the quantised words written to
// the classifier's model port.  `traffic` generates synthetic CAN ID streams:
// a fixed cyclic schedule of legitimate IDs, optionally mixed with a flooding
// ID (DoS) or random IDs (fuzzing), or legitimate IDs out of schedule.
// The feature definitions follow the method; the damping, the variance floor
// and the synthetic traffic are this design's own choices.
package ggnb_ref_pkg;
  import ggnb_pkg::*;

  typedef struct {
    real f [N_FEAT];
    int  n;
    int  e;
    int  selfloops;
    int  dangling;
    bit  even_n;
  } ref_result_t;

  function automatic ref_result_t window_features(input int ids [$], input int max_nodes = 1 << 30,
                                                  input int max_edges = 1 << 30);
    ref_result_t r;
    int vid [$];           // vertex -> ID
    int esrc [$], edst [$];
    int indeg [$], outdeg [$];
    int prev, v, n, e;
    bit has_prev, found;
    real pr [$], nxt [$], sorted [$];
    real dang, diff, mx, mn;
    int mxi, mxo, mni, mno;
    has_prev = 0;
    prev = 0;
    foreach (ids[k]) begin
      v = -1;
      foreach (vid[q]) if (vid[q] == ids[k]) v = q;
      if (v < 0) begin
        if (vid.size() == max_nodes) begin   // vertex table full: message lost
          has_prev = 0;
          continue;
        end
        vid.push_back(ids[k]); indeg.push_back(0); outdeg.push_back(0);
        v = vid.size() - 1;
      end
      if (has_prev) begin
        found = 0;
        foreach (esrc[q]) if (esrc[q] == prev && edst[q] == v) found = 1;
        if (!found && esrc.size() < max_edges) begin
          esrc.push_back(prev); edst.push_back(v);
          outdeg[prev]++; indeg[v]++;
        end
      end
      prev = v; has_prev = 1;
    end
    n = vid.size(); e = esrc.size();
    r.n = n; r.e = e; r.even_n = (n % 2 == 0);
    r.selfloops = 0; r.dangling = 0;
    foreach (esrc[q]) if (esrc[q] == edst[q]) r.selfloops++;
    foreach (outdeg[q]) if (outdeg[q] == 0) r.dangling++;
    for (int i = 0; i < N_FEAT; i++) r.f[i] = 0.0;
    if (n == 0) return r;
    mxi = 0; mxo = 0; mni = 1 << 30; mno = 1 << 30;
    for (int q = 0; q < n; q++) begin
      if (indeg[q] > mxi) mxi = indeg[q];
      if (outdeg[q] > mxo) mxo = outdeg[q];
      if (indeg[q] < mni) mni = indeg[q];
      if (outdeg[q] < mno) mno = outdeg[q];
    end
    for (int q = 0; q < n; q++) begin pr.push_back(1.0 / n); nxt.push_back(0.0); end
    for (int it = 0; it < 2000; it++) begin
      dang = 0.0;
      for (int q = 0; q < n; q++) begin
        nxt[q] = 0.0;
        if (outdeg[q] == 0) dang += pr[q];
      end
      for (int k = 0; k < e; k++) nxt[edst[k]] += pr[esrc[k]] / outdeg[esrc[k]];
      diff = 0.0;
      for (int q = 0; q < n; q++) begin
        nxt[q] = 0.15 / n + 0.85 * (nxt[q] + dang / n);
        diff += (nxt[q] > pr[q]) ? nxt[q] - pr[q] : pr[q] - nxt[q];
        pr[q] = nxt[q];
      end
      if (diff < 1e-13) break;
    end
    sorted = pr;
    sorted.sort();
    mn = sorted[0]; mx = sorted[n - 1];
    r.f[F_NODES]   = n;
    r.f[F_EDGES]   = e;
    r.f[F_MAX_IN]  = mxi;
    r.f[F_MAX_OUT] = mxo;
    r.f[F_MIN_IN]  = mni;
    r.f[F_MIN_OUT] = mno;
    r.f[F_MED_PR]  = (sorted[(n - 1) / 2] + sorted[n / 2]) / 2.0;
    r.f[F_MAX_PR]  = mx;
    r.f[F_MIN_PR]  = mn;
    return r;
  endfunction

  class gnb_model;
    real s1 [2][N_FEAT];
    real s2 [2][N_FEAT];
    int  cnt [2];
    real mu [2][N_FEAT];
    real vr [2][N_FEAT];
    real prior [2];
    longint q_mean [2][N_FEAT];
    longint q_wgt  [2][N_FEAT];

    function new();
      for (int c = 0; c < 2; c++) begin
        cnt[c] = 0;
        for (int f = 0; f < N_FEAT; f++) begin s1[c][f] = 0.0; s2[c][f] = 0.0; end
      end
    endfunction

    function void add(input real x [N_FEAT], input int label);
      cnt[label]++;
      for (int f = 0; f < N_FEAT; f++) begin
        s1[label][f] += x[f];
        s2[label][f] += x[f] * x[f];
      end
    endfunction

    // priors, means, variances; variance floor 1e-9 of the largest variance
    // (a common smoothing choice), and at least one PageRank LSB squared
    function void fit();
      real vmax, floor_v, w;
      vmax = 0.0;
      for (int c = 0; c < 2; c++) begin
        prior[c] = real'(cnt[c]) / real'(cnt[0] + cnt[1]);
        for (int f = 0; f < N_FEAT; f++) begin
          mu[c][f] = s1[c][f] / cnt[c];
          vr[c][f] = s2[c][f] / cnt[c] - mu[c][f] * mu[c][f];
          if (vr[c][f] < 0.0) vr[c][f] = 0.0;
          if (vr[c][f] > vmax) vmax = vr[c][f];
        end
      end
      floor_v = 1e-9 * vmax;
      if (floor_v < 1e-7) floor_v = 1e-7;
      for (int c = 0; c < 2; c++)
        for (int f = 0; f < N_FEAT; f++) begin
          if (vr[c][f] < floor_v) vr[c][f] = floor_v;
          q_mean[c][f] = longint'(mu[c][f] * real'(64'd1 << FEAT_FRAC));
          w = 1.0 / (2.0 * vr[c][f]) * real'(64'd1 << WGT_FRAC);
          if (w > 1.0e12) w = 1.0e12;     // stays inside the unsigned Q24.16 weight
          q_wgt[c][f] = longint'(w);
        end
    endfunction

    // class constant for a mask: ln P(c) - sum ln sigma
    function longint q_const(input int c, input logic [N_FEAT-1:0] mask);
      real k;
      k = $ln(prior[c]);
      for (int f = 0; f < N_FEAT; f++) if (mask[f]) k -= 0.5 * $ln(vr[c][f]);
      return longint'(k * real'(64'd1 << SCORE_FRAC));
    endfunction

    // score of the quantised model, evaluated in double precision
    function real score(input real x [N_FEAT], input int c, input logic [N_FEAT-1:0] mask);
      real s, m, w, d;
      s = real'(q_const(c, mask)) / real'(64'd1 << SCORE_FRAC);
      for (int f = 0; f < N_FEAT; f++) if (mask[f]) begin
        m = real'(q_mean[c][f]) / real'(64'd1 << FEAT_FRAC);
        w = real'(q_wgt[c][f]) / real'(64'd1 << WGT_FRAC);
        d = x[f] - m;
        s -= d * d * w;
      end
      return s;
    endfunction
  endclass

  // Synthetic traffic.  mode 0: normal, 1: DoS (flooding ID 0x000), 2: fuzzing
  // (random IDs), 3: legitimate IDs in random order (out-of-schedule
  // injection, used to fill the edge list).  Legitimate IDs follow a fixed cyclic schedule; each slot
  // is skipped with a small probability.
  class traffic;
    int legit [$];
    int pos;
    int mode;
    function new(input int n_legit);
      for (int i = 0; i < n_legit; i++) legit.push_back(16 + 37 * i);
      pos = 0;
      mode = 0;
    endfunction
    // next ID and whether it is an injected one
    function int next(output bit injected);
      injected = 0;
      if (mode == 1 && $urandom_range(99) < 60) begin injected = 1; return 0; end
      if (mode == 2 && $urandom_range(99) < 50) begin injected = 1; return int'($urandom_range(1, 2047)); end
      if (mode == 3) begin injected = 1; return legit[$urandom_range(legit.size() - 1)]; end
      if ($urandom_range(99) < 8) pos = (pos + 1) % legit.size();
      next = legit[pos];
      pos = (pos + 1) % legit.size();
    endfunction
  endclass

endpackage
