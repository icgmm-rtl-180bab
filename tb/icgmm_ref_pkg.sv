// icgmm_ref_pkg: reference models shared by the ICGMM testbenches.
//
// ref_score    bit-exact GMM score of the documented number formats, computed
//              with wide integer arithmetic (independently of gmm_pe's pipeline)
// rand_gauss   a random Gaussian in weight-buffer format, from a random mean,
//              standard deviations and correlation, folded into base-2 terms
// cache_model  behavioural model of the 8-way cache and its policies
package icgmm_ref_pkg;
  import icgmm_pkg::*;

  function automatic longint unsigned ref_score(input gauss_t g[$],
                                                input logic [PI_W-1:0] p,
                                                input logic [TS_W-1:0] t);
    logic signed [191:0] dp, dt, q, e, sum;
    logic [191:0] term;
    real r;
    sum = 0;
    foreach (g[k]) begin
      dp = $signed({1'b0, p}) - $signed({1'b0, g[k].mu_p});
      dt = $signed({1'b0, t}) - $signed({1'b0, g[k].mu_t});
      q  = $signed(g[k].a) * dp * dp + $signed(g[k].b) * dp * dt + $signed(g[k].c) * dt * dt;
      if (q < 0) q = 0;
      e = (q >>> (COEF_FRAC - EXP_FRAC)) + g[k].l;
      if (e > 65535) e = 65535;
      if ((e >> EXP_FRAC) > SCORE_FRAC) term = 0;
      else begin
        r = 2.0 ** (-real'(e % 256) / 256.0);
        term = 192'($rtoi(r * 16777216.0 + 0.5)) >> (e >> EXP_FRAC);
      end
      sum = sum + term;
    end
    if (sum > 192'hFFFF_FFFF) sum = 192'hFFFF_FFFF;
    return longint'(sum);
  endfunction

  function automatic gauss_t rand_gauss(input longint unsigned base_p, input int range_p,
                                        input int range_t, input real max_sp, input real max_st,
                                        input int max_l);
    gauss_t g;
    real sp, st, rho, det, ipp, ipt, itt;
    sp  = 1.0 + real'($urandom_range(1000)) / 1000.0 * max_sp;
    st  = 1.0 + real'($urandom_range(1000)) / 1000.0 * max_st;
    rho = (real'($urandom_range(100)) - 50.0) / 100.0;
    det = sp*sp*st*st*(1.0 - rho*rho);
    ipp = st*st/det; itt = sp*sp/det; ipt = -rho*sp*st/det;
    g.mu_p = PI_W'(base_p + longint'($urandom_range(range_p)));
    g.mu_t = TS_W'($urandom_range(range_t));
    g.a = longint'(0.7213475 * ipp * (2.0 ** COEF_FRAC));
    g.b = longint'(1.4426950 * ipt * (2.0 ** COEF_FRAC));
    g.c = longint'(0.7213475 * itt * (2.0 ** COEF_FRAC));
    g.l = EXP_W'($urandom_range(max_l));
    return g;
  endfunction

  // Behavioural model of the DRAM cache and its policies.
  class cache_model;
    int nsets;
    bit      valid [][WAYS];
    bit      dirty [][WAYS];
    longint  tag   [][WAYS];
    longint unsigned score [][WAYS];
    int      age   [][WAYS];
    // what the last access did
    bit last_hit, last_bypass, last_evict, last_dirty_wb, last_bypass_wr;

    function new(int n);
      nsets = n;
      valid = new[n]; dirty = new[n]; tag = new[n]; score = new[n]; age = new[n];
      foreach (valid[s, w]) begin
        valid[s][w] = 0; dirty[s][w] = 0; tag[s][w] = 0; score[s][w] = 0; age[s][w] = 0;
      end
    endfunction

    function void make_mru(int s, int w);
      int old = valid[s][w] ? age[s][w] : WAYS - 1;
      for (int i = 0; i < WAYS; i++)
        if (i != w && valid[s][i] && age[s][i] < old) age[s][i]++;
      age[s][w] = 0;
    endfunction

    // pi: page index; sc: GMM score (ignored under LRU)
    function void access(policy_e pol, longint unsigned thr, longint pi, bit wr,
                         longint unsigned sc);
      int s = int'(pi % nsets);
      longint tg = pi / nsets;
      int v;
      bit cache_it;
      last_hit = 0; last_bypass = 0; last_evict = 0; last_dirty_wb = 0; last_bypass_wr = 0;
      for (int w = 0; w < WAYS; w++)
        if (valid[s][w] && tag[s][w] == tg) begin
          last_hit = 1;
          if (wr) dirty[s][w] = 1;
          make_mru(s, w);
          return;
        end
      if (pol == POL_LRU) sc = 0;
      cache_it = !(pol == POL_GMM_CACHE || pol == POL_GMM_BOTH) || sc >= thr;
      if (!cache_it) begin
        last_bypass = 1; last_bypass_wr = wr;
        return;
      end
      v = -1;
      for (int w = 0; w < WAYS; w++) if (!valid[s][w] && v < 0) v = w;
      if (v < 0) begin
        v = 0;
        if (pol == POL_GMM_EVICT || pol == POL_GMM_BOTH) begin
          for (int w = 1; w < WAYS; w++) if (score[s][w] < score[s][v]) v = w;
        end else begin
          for (int w = 1; w < WAYS; w++) if (age[s][w] > age[s][v]) v = w;
        end
        last_evict = 1;
        last_dirty_wb = dirty[s][v];
      end
      make_mru(s, v);
      valid[s][v] = 1; dirty[s][v] = wr; tag[s][v] = tg; score[s][v] = sc;
    endfunction
  endclass
endpackage
