// tb_icgmm_workload: the four cache policies on one synthetic memory trace, in
// the spirit of the evaluation that compares LRU with the three GMM strategies.
//
// The trace is generated here. Two thirds of the requests go to "hot" pages drawn
// from Gaussian clusters in (page, time window): clusters A and B are active in
// the first half of the trace, clusters C and D in the second half. Every third
// request is a one-time scan of a fresh page far from all clusters, which
// pollutes an LRU cache. The GMM loaded into the engine is exactly the
// generator's mixture, folded into the hardware's base-2 form (equal weights, so
// l = 0; no correlation, so b = 0). This stands in for a trained model. The
// caching threshold is the score of a page three standard deviations from a
// cluster centre.
//
// The cache is reduced to 64 sets x 8 ways. SSD latencies are shortened to 40 /
// 90 cycles so that the run is short. Windows have the default 32 requests. The
// same 12,000-request trace runs under each policy, with a reset before each
// run. Checks, for every run:
//   - every hit/miss and every counter match the policy model, which is fed the
//     bit-exact reference score of each missed page;
//   - the emulated SSD time is exactly R per miss plus W per page write;
//   - the busy time is exactly the per-case service time (hit 3, cached clean
//     miss R+5, dirty write-back R+W+6, bypassed read R+3, bypassed write R+W+4);
//   - scan pages are bypassed under smart caching.
// Across the runs, the best GMM policy must miss less often than LRU. The testbench
// prints the miss rate and the average access time each policy would have with the
// real 75 us / 900 us SSD at 233 MHz. Those times are obtained by rescaling the
// exact cycle counts, since every SSD access costs a fixed R or W.
`timescale 1ns/1ps
module tb_icgmm_workload;
  import icgmm_pkg::*;
  import icgmm_ref_pkg::*;

  localparam int unsigned NS = 64, NG = 4, RD = 40, WR = 90;
  localparam int unsigned NREQ = 12000;
  localparam real SIG_P = 30.0, SIG_T = 60.0;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  policy_e policy;
  logic ts_from_trace;
  score_t threshold;
  logic ld_en;
  logic [$clog2(NG)-1:0] ld_addr;
  gauss_t ld_data;
  logic trc_valid, trc_ready;
  trace_t trc_data;
  logic init_done, res_valid, res_hit;
  logic [31:0] n_req, n_hit, n_miss, n_bypass, n_evict, n_dirty_wb, n_gmm_req, n_infer;
  logic [47:0] busy_cycles, ssd_cycles;

  icgmm_top #(.NUM_SETS(NS), .NUM_G(NG), .READ_CYC(RD), .WRITE_CYC(WR)) dut (.*);

  int checks = 0, failures = 0;
  gauss_t g[$];
  longint tr_pi[NREQ];
  bit     tr_wr[NREQ];
  bit     tr_scan[NREQ];
  bit exp_hit[$];
  int n_res = 0;

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    #100000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && res_valid) begin
    chk(n_res < exp_hit.size() && res_hit == exp_hit[n_res], $sformatf("request %0d hit %0d", n_res, res_hit));
    n_res++;
  end

  // a standard normal sample (Box-Muller)
  function automatic real randn();
    real u1 = real'($urandom_range(1000000, 1)) / 1000000.0;
    real u2 = real'($urandom_range(1000000)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  function automatic gauss_t cluster(input longint mp, input int mt);
    gauss_t c;
    c.mu_p = PI_W'(mp);
    c.mu_t = TS_W'(mt);
    c.a = longint'(0.7213475 / (SIG_P * SIG_P) * (2.0 ** COEF_FRAC));
    c.b = '0;
    c.c = longint'(0.7213475 / (SIG_T * SIG_T) * (2.0 ** COEF_FRAC));
    c.l = '0;
    return c;
  endfunction

  // results per policy, for the comparison at the end
  longint r_miss[4];
  real    r_us[4];

  task automatic run(input policy_e pol, input longint unsigned thr);
    longint e_hit = 0, e_miss = 0, e_byp = 0, e_ev = 0, e_wb = 0, e_gmm = 0, e_bw = 0;
    longint e_busy = 0, scan_cached = 0, scans = 0;
    cache_model m = new(NS);
    real busy_real;
    // reset: clears the tag table, the window counter and the counters
    @(negedge clk); rst_n = 0; policy = pol; threshold = score_t'(thr);
    repeat (2) @(negedge clk); rst_n = 1;
    exp_hit.delete(); n_res = 0;
    wait (init_done);
    for (int n = 0; n < NREQ; n++) begin
      automatic int ts = (n / LEN_WINDOW) % LEN_SHOT;
      automatic longint unsigned sc = (pol == POL_LRU) ? 0 : ref_score(g, PI_W'(tr_pi[n]), TS_W'(ts));
      m.access(pol, thr, tr_pi[n], tr_wr[n], sc);
      exp_hit.push_back(m.last_hit);
      if (m.last_hit) begin e_hit++; e_busy += 3; end
      else begin
        e_miss++;
        if (pol != POL_LRU) e_gmm++;
        if (m.last_bypass) e_busy += tr_wr[n] ? RD + WR + 4 : RD + 3;
        else if (m.last_dirty_wb) e_busy += RD + WR + 6;
        else e_busy += RD + 5;
      end
      if (m.last_bypass) begin e_byp++; if (tr_wr[n]) e_bw++; end
      if (m.last_evict) e_ev++;
      if (m.last_dirty_wb) e_wb++;
      if (tr_scan[n]) begin scans++; if (!m.last_hit && !m.last_bypass) scan_cached++; end
      @(negedge clk);
      trc_valid = 1;
      trc_data = '{wr: tr_wr[n], pa: {PI_W'(tr_pi[n]), 12'($urandom)}, time_raw: '0};
      @(posedge clk);
      while (!trc_ready) @(posedge clk);
      @(negedge clk);
      trc_valid = 0;
    end
    while (n_res < NREQ) @(posedge clk);
    repeat (WR + 20) @(posedge clk);
    chk(n_req == 32'(NREQ) && n_hit == 32'(e_hit) && n_miss == 32'(e_miss),
        $sformatf("%s: req %0d hit %0d miss %0d vs %0d/%0d", pol.name(), n_req, n_hit, n_miss, e_hit, e_miss));
    chk(n_bypass == 32'(e_byp) && n_evict == 32'(e_ev) && n_dirty_wb == 32'(e_wb),
        $sformatf("%s: bypass %0d evict %0d wb %0d vs %0d/%0d/%0d", pol.name(), n_bypass, n_evict, n_dirty_wb, e_byp, e_ev, e_wb));
    chk(n_gmm_req == 32'(e_gmm) && n_infer == 32'(e_gmm), $sformatf("%s: GMM requests %0d", pol.name(), n_infer));
    chk(ssd_cycles == 48'(e_miss * RD + (e_wb + e_bw) * WR), $sformatf("%s: ssd cycles %0d", pol.name(), ssd_cycles));
    chk(busy_cycles == 48'(e_busy), $sformatf("%s: busy cycles %0d vs %0d", pol.name(), busy_cycles, e_busy));
    if (pol == POL_GMM_CACHE || pol == POL_GMM_BOTH)
      chk(scan_cached == 0, $sformatf("%s: %0d scan pages cached", pol.name(), scan_cached));
    // average access time with the real SSD: replace R and W by their full values
    busy_real = real'(busy_cycles) + real'(e_miss) * real'(SSD_READ_CYC - RD)
              + real'(e_wb + e_bw) * real'(SSD_WRITE_CYC - WR);
    r_miss[int'(pol)] = e_miss;
    r_us[int'(pol)]   = busy_real / real'(NREQ) / real'(CLK_MHZ);
    $display("%-14s miss rate %5.2f%%  bypass %0d  evict %0d  dirty wb %0d  scans %0d  avg access %0.2f us",
             pol.name(), 100.0 * real'(e_miss) / real'(NREQ), e_byp, e_ev, e_wb, scans,
             r_us[int'(pol)]);
  endtask

  initial begin
    longint unsigned thr;
    longint best;
    policy = POL_LRU; ts_from_trace = 0; threshold = '0; ld_en = 0; ld_addr = '0; ld_data = '0;
    trc_valid = 0; trc_data = '0;
    // clusters A, B (first half of the trace) and C, D (second half)
    g.push_back(cluster(1000, 94));
    g.push_back(cluster(3000, 94));
    g.push_back(cluster(2000, 281));
    g.push_back(cluster(5000, 281));
    // the trace
    for (int n = 0; n < NREQ; n++) begin
      tr_scan[n] = (n % 3 == 2);
      if (tr_scan[n]) tr_pi[n] = 100000 + n;
      else begin
        automatic int k = ((n < NREQ / 2) ? 0 : 2) + int'($urandom_range(1));
        automatic longint p = longint'(g[k].mu_p) + longint'(SIG_P * randn());
        tr_pi[n] = (p < 0) ? 0 : p;
      end
      tr_wr[n] = ($urandom_range(3) == 0);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NG; k++) begin
      @(negedge clk); ld_en = 1; ld_addr = $bits(ld_addr)'(k); ld_data = g[k];
    end
    @(negedge clk); ld_en = 0;
    // threshold: three standard deviations from the centre of cluster A
    thr = ref_score(g, PI_W'(longint'(g[0].mu_p) + 90), g[0].mu_t);
    $display("threshold %0d (Q8.24), peak score %0d", thr, ref_score(g, g[0].mu_p, g[0].mu_t));
    // the weight buffer survives the resets between runs
    run(POL_LRU, thr);
    run(POL_GMM_CACHE, thr);
    run(POL_GMM_EVICT, thr);
    run(POL_GMM_BOTH, thr);
    best = r_miss[1];
    for (int p = 2; p < 4; p++) if (r_miss[p] < best) best = r_miss[p];
    chk(best < r_miss[0], $sformatf("best GMM policy misses %0d, LRU %0d", best, r_miss[0]));
    $display("miss reduction of the best GMM policy against LRU: %0.1f%%",
             100.0 * real'(r_miss[0] - best) / real'(r_miss[0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
