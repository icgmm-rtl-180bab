// tb_icgmm_full: the ICGMM system at its full default size: 2048 sets x 8 ways
// (64 MB of 4 KB blocks), 256 Gaussians, 75 us / 900 us SSD latency at 233 MHz,
// 32-request windows. After loading random Gaussians it runs one complete
// operation under the combined GMM policy (smart caching and smart eviction):
// requests to a few sets, enough to fill a set, hit, bypass, evict by lowest
// score and write a dirty block back. Every hit/miss and the counters are checked
// against the policy model with reference GMM scores, as is the total emulated SSD
// time (17,475 cycles per miss, 209,700 per page write).
`timescale 1ns/1ps
module tb_icgmm_full;
  import icgmm_pkg::*;
  import icgmm_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  policy_e policy;
  logic ts_from_trace;
  score_t threshold;
  logic ld_en;
  logic [7:0] ld_addr;
  gauss_t ld_data;
  logic trc_valid, trc_ready;
  trace_t trc_data;
  logic init_done, res_valid, res_hit;
  logic [31:0] n_req, n_hit, n_miss, n_bypass, n_evict, n_dirty_wb, n_gmm_req, n_infer;
  logic [47:0] busy_cycles, ssd_cycles;

  icgmm_top dut (.*);

  int checks = 0, failures = 0;
  gauss_t g[$];
  cache_model m;
  bit exp_hit[$];
  int n_res = 0;
  longint e_hit = 0, e_miss = 0, e_byp = 0, e_ev = 0, e_wb = 0, e_ssd = 0;

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    #40000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && res_valid) begin
    chk(n_res < exp_hit.size() && res_hit == exp_hit[n_res], $sformatf("request %0d hit %0d", n_res, res_hit));
    n_res++;
  end

  initial begin
    longint unsigned thr, sc_all[$];
    longint pages[$];
    policy = POL_GMM_BOTH; ts_from_trace = 0; threshold = '0; ld_en = 0; ld_addr = 0; ld_data = '0;
    trc_valid = 0; trc_data = '0;
    m = new(SETS);
    repeat (3) @(posedge clk); rst_n = 1;
    // Gaussians over pages 0 .. 40,000 and timestamps 0 .. 3
    for (int k = 0; k < NUM_GAUSS; k++) begin
      g.push_back(rand_gauss(0, 40000, 3, 3000.0, 2.0, 3000));
      @(negedge clk); ld_en = 1; ld_addr = 8'(k); ld_data = g[k];
    end
    @(negedge clk); ld_en = 0;
    wait (init_done);
    // pages: 12 tags in set 5, 3 tags in set 6
    for (int k = 0; k < 12; k++) pages.push_back(5 + longint'(SETS) * k);
    for (int k = 0; k < 3; k++)  pages.push_back(6 + longint'(SETS) * k);
    foreach (pages[i]) sc_all.push_back(ref_score(g, PI_W'(pages[i]), 0));
    sc_all.sort();
    thr = sc_all[3];              // the lowest-scoring pages are bypassed
    threshold = score_t'(thr);
    for (int n = 0; n < 60; n++) begin
      automatic longint pi = pages[(n < 15) ? n : $urandom_range(pages.size() - 1)];
      automatic bit wr = (n < 15) ? (n % 3 == 0) : ($urandom_range(3) == 0);
      automatic int ts = (n / LEN_WINDOW) % LEN_SHOT;
      automatic longint unsigned sc = ref_score(g, PI_W'(pi), TS_W'(ts));
      m.access(POL_GMM_BOTH, thr, pi, wr, sc);
      exp_hit.push_back(m.last_hit);
      if (m.last_hit) e_hit++; else begin e_miss++; e_ssd += SSD_READ_CYC; end
      if (m.last_bypass) begin e_byp++; if (wr) e_ssd += SSD_WRITE_CYC; end
      if (m.last_evict) e_ev++;
      if (m.last_dirty_wb) begin e_wb++; e_ssd += SSD_WRITE_CYC; end
      @(negedge clk);
      trc_valid = 1;
      trc_data = '{wr: wr, pa: {PI_W'(pi), 12'($urandom)}, time_raw: $urandom};
      #1;
      while (!trc_ready) begin @(negedge clk); #1; end
      @(negedge clk); trc_valid = 0;
    end
    while (n_res < 60) @(negedge clk);
    repeat (SSD_WRITE_CYC + 50) @(negedge clk);
    chk(n_req == 60 && n_hit == 32'(e_hit) && n_miss == 32'(e_miss), "hit/miss counters");
    chk(n_bypass == 32'(e_byp) && n_evict == 32'(e_ev) && n_dirty_wb == 32'(e_wb), "policy counters");
    chk(n_infer == 32'(e_miss) && n_gmm_req == 32'(e_miss), "one inference per miss");
    chk(ssd_cycles == 48'(e_ssd), $sformatf("ssd cycles %0d expected %0d", ssd_cycles, e_ssd));
    chk(e_hit > 0 && e_byp > 0 && e_ev > 0 && e_wb > 0, "all cases reached");
    $display("hits %0d misses %0d bypass %0d evictions %0d dirty write-backs %0d", e_hit, e_miss, e_byp, e_ev, e_wb);
    $display("average access time %0d cycles (%0d ns at 233 MHz)", busy_cycles / 60,
             busy_cycles * 1000 / 60 / 233);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
