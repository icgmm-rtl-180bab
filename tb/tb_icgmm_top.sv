// tb_icgmm_top: end-to-end test of the ICGMM cache system at reduced size.
//
// A small cache (4 sets x 8 ways), 8 Gaussians and short SSD latencies keep the run
// short. Random Gaussians are loaded through the load port, then random requests
// over 64 pages run under each policy in turn (LRU, GMM caching, GMM eviction,
// both) without reset in between, so the policy switch happens on a warm cache.
// A fifth phase repeats the combined policy with ts_from_trace set: each trace
// then carries its own timestamp in its Time field, which the GMM must use.
// The hit/miss of every request and the final counters are compared with a
// behavioural model of the policies (icgmm_ref_pkg::cache_model) fed with the
// bit-exact reference GMM score of each missed page. The test counts how often
// each mechanism happened and fails if one never did: hit, miss, bypass (score
// below threshold), LRU eviction, GMM eviction, dirty write-back, bypassed write,
// GMM inference, trace back-pressure, timestamp window step and access-shot wrap,
// and timestamps taken from the trace.
`timescale 1ns/1ps
module tb_icgmm_top;
  import icgmm_pkg::*;
  import icgmm_ref_pkg::*;

  localparam int unsigned NS = 4, NG = 8, RD = 40, WR = 90, LW = 4, LS = 5;
  localparam int unsigned NREQ = 150;   // per policy

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  policy_e policy;
  score_t threshold;
  logic ts_from_trace;
  logic ld_en;
  logic [$clog2(NG)-1:0] ld_addr;
  gauss_t ld_data;
  logic trc_valid, trc_ready;
  trace_t trc_data;
  logic init_done, res_valid, res_hit;
  logic [31:0] n_req, n_hit, n_miss, n_bypass, n_evict, n_dirty_wb, n_gmm_req, n_infer;
  logic [47:0] busy_cycles, ssd_cycles;

  icgmm_top #(.NUM_SETS(NS), .NUM_G(NG), .READ_CYC(RD), .WRITE_CYC(WR),
              .LEN_WINDOW_P(LW), .LEN_SHOT_P(LS), .FIFO_DEPTH(2)) dut (.*);

  int checks = 0, failures = 0;
  gauss_t g[$];
  cache_model m;
  // expected results, in request order
  bit exp_hit[$];
  int n_res = 0, n_sent = 0;
  int ev_lru = 0, ev_gmm = 0, wb = 0, byp = 0, byp_wr = 0, hits = 0, misses = 0;
  int stalls = 0, trace_ts = 0;
  longint e_req = 0, e_hit = 0, e_miss = 0, e_byp = 0, e_evict = 0, e_wb = 0, e_gmm = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare each lookup result with the model
  always @(posedge clk) if (rst_n && res_valid) begin
    checks++;
    if (n_res >= exp_hit.size() || res_hit != exp_hit[n_res]) begin
      failures++;
      $display("FAIL: request %0d hit=%0d expected %0d", n_res, res_hit,
               n_res < exp_hit.size() ? exp_hit[n_res] : 2);
    end
    n_res++;
  end
  always @(posedge clk) if (rst_n && trc_valid && !trc_ready && init_done) stalls++;

  task automatic run_policy(input policy_e pol, input longint unsigned thr,
                            input bit from_trace = 0);
    policy = pol;
    ts_from_trace = from_trace;
    threshold = score_t'(thr);
    for (int n = 0; n < NREQ; n++) begin
      longint pi;
      bit wr;
      int ts;
      longint unsigned sc;
      // hot pages 0..15 more often than the rest
      pi = ($urandom_range(3) == 0) ? longint'($urandom_range(63)) : longint'($urandom_range(23));
      wr = ($urandom_range(3) == 0);
      ts = from_trace ? int'($urandom_range(LS - 1)) : (n_sent / LW) % LS;
      if (from_trace) trace_ts++;
      sc = ref_score(g, PI_W'(pi), TS_W'(ts));
      m.access(pol, thr, pi, wr, sc);
      exp_hit.push_back(m.last_hit);
      e_req++;
      if (m.last_hit) begin e_hit++; hits++; end
      else begin
        e_miss++; misses++;
        if (pol != POL_LRU) e_gmm++;
      end
      if (m.last_bypass) begin e_byp++; byp++; if (wr) byp_wr++; end
      if (m.last_evict) begin
        e_evict++;
        if (pol == POL_GMM_EVICT || pol == POL_GMM_BOTH) ev_gmm++; else ev_lru++;
      end
      if (m.last_dirty_wb) begin e_wb++; wb++; end
      @(negedge clk);
      trc_valid = 1;
      trc_data = '{wr: wr, pa: {PI_W'(pi), 12'($urandom)}, time_raw: from_trace ? 32'(ts) : 32'($urandom)};
      @(posedge clk);
      while (!trc_ready) @(posedge clk);
      n_sent++;
      @(negedge clk);
      trc_valid = 0;
    end
    // drain before the policy changes
    while (n_res < n_sent) @(posedge clk);
    repeat (WR + 20) @(posedge clk);
    check(n_req == 32'(e_req), $sformatf("n_req %0d vs %0d", n_req, e_req));
    check(n_hit == 32'(e_hit), $sformatf("n_hit %0d vs %0d", n_hit, e_hit));
    check(n_miss == 32'(e_miss), $sformatf("n_miss %0d vs %0d", n_miss, e_miss));
    check(n_bypass == 32'(e_byp), $sformatf("n_bypass %0d vs %0d", n_bypass, e_byp));
    check(n_evict == 32'(e_evict), $sformatf("n_evict %0d vs %0d", n_evict, e_evict));
    check(n_dirty_wb == 32'(e_wb), $sformatf("n_dirty_wb %0d vs %0d", n_dirty_wb, e_wb));
    check(n_gmm_req == 32'(e_gmm) && n_infer == 32'(e_gmm),
          $sformatf("gmm requests %0d / inferences %0d vs %0d", n_gmm_req, n_infer, e_gmm));
    $display("policy %s: req %0d hit %0d miss %0d bypass %0d evict %0d dirty_wb %0d",
             pol.name(), n_req, n_hit, n_miss, n_bypass, n_evict, n_dirty_wb);
  endtask

  initial begin
    longint unsigned sc_all[$], thr;
    policy = POL_LRU; threshold = '0; ts_from_trace = 0; ld_en = 0; ld_addr = '0; ld_data = '0;
    trc_valid = 0; trc_data = '0;
    m = new(NS);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NG; k++) begin
      g.push_back(rand_gauss(0, 40, LS, 8.0, 3.0, 1024));
      @(negedge clk);
      ld_en = 1; ld_addr = $bits(ld_addr)'(k); ld_data = g[k];
    end
    @(negedge clk); ld_en = 0;
    wait (init_done);
    // threshold: median score over the page / timestamp space
    for (int p = 0; p < 64; p++)
      for (int t = 0; t < LS; t++) sc_all.push_back(ref_score(g, PI_W'(p), TS_W'(t)));
    sc_all.sort();
    thr = sc_all[sc_all.size() / 2];
    run_policy(POL_LRU, thr);
    run_policy(POL_GMM_CACHE, thr);
    run_policy(POL_GMM_EVICT, thr);
    run_policy(POL_GMM_BOTH, thr);
    run_policy(POL_GMM_BOTH, thr, 1);
    check(ssd_cycles == 48'(e_miss * RD + (e_wb + byp_wr) * WR),
          $sformatf("ssd cycles %0d", ssd_cycles));
    $display("events: hits %0d misses %0d bypass %0d (writes %0d) lru_evict %0d gmm_evict %0d dirty_wb %0d stalls %0d",
             hits, misses, byp, byp_wr, ev_lru, ev_gmm, wb, stalls);
    $display("average service time %0d cycles per request", busy_cycles / 48'(n_req));
    check(hits > 0, "no hit");
    check(misses > 0, "no miss");
    check(byp > 0, "no bypass");
    check(byp_wr > 0, "no bypassed write");
    check(ev_lru > 0, "no LRU eviction");
    check(ev_gmm > 0, "no GMM eviction");
    check(wb > 0, "no dirty write-back");
    check(n_infer > 0, "no GMM inference");
    check(stalls > 0, "no back-pressure");
    check(trace_ts > 0, "no timestamp from the trace");
    check(n_sent > LW * LS, "timestamp never wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
