// tb_signal_controller: the controller between a trace source and models of both
// engines. The cache engine model takes requests with random back-pressure and
// answers hit/miss at random; the policy engine model answers each request with a
// score derived from it. Checks: requests reach the cache engine in order with the
// window timestamp of Algorithm 1 (window 4, shot 3 here) or, with
// ts_from_trace set (second half of the run), the trace's own Time field; exactly the misses
// reach the policy engine, and only while the policy is not LRU; scores pass on
// unchanged and in order; gmm_enable follows the policy; n_gmm_req counts.
`timescale 1ns/1ps
module tb_signal_controller;
  import icgmm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  policy_e policy;
  logic ts_from_trace;
  logic in_valid, in_ready, cc_trc_valid, cc_trc_ready, cc_rsp_valid, cc_rsp_ready;
  logic cc_scr_valid, cc_scr_ready, gmm_enable, gp_trc_valid, gp_trc_ready;
  logic gp_rsp_valid, gp_rsp_ready, res_valid, res_hit;
  trace_t in_data;
  req_t cc_trc_data, gp_trc_data;
  rsp_t cc_rsp_data;
  score_t cc_scr_data, gp_rsp_data;
  logic [31:0] n_gmm_req;
  signal_controller #(.LEN_WINDOW_P(4), .LEN_SHOT_P(3)) dut (.*);

  int checks = 0, failures = 0;
  trace_t sent[$];
  req_t at_cc[$], exp_gp[$];
  bit hits[$];
  score_t exp_scr[$];
  int n_in = 0, n_cc = 0, n_gp = 0, n_scr = 0, n_res = 0, e_gmm = 0;

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // cache engine model: accept requests, answer in order after a delay
  logic cc_trc_ready_r = 0;
  assign cc_trc_ready = rst_n && cc_trc_ready_r;
  always @(negedge clk) cc_trc_ready_r = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (cc_trc_valid && cc_trc_ready) begin
      chk(cc_trc_data.pa == sent[n_cc].pa && cc_trc_data.wr == sent[n_cc].wr, $sformatf("request order %0d: %h vs %h (sent %0d)", n_cc, cc_trc_data.pa, sent[n_cc].pa, sent.size()));
      if (ts_from_trace)
        chk(cc_trc_data.ts == sent[n_cc].time_raw[TS_W-1:0], $sformatf("trace ts for request %0d", n_cc));
      else
        chk(cc_trc_data.ts == TS_W'((n_cc / 4) % 3), $sformatf("ts %0d for request %0d", cc_trc_data.ts, n_cc));
      at_cc.push_back(cc_trc_data);
      n_cc++;
    end
  end
  always @(negedge clk) begin
    if (!cc_rsp_valid && at_cc.size() > 0 && $urandom_range(2) == 0) begin
      cc_rsp_valid = 1;
      cc_rsp_data.hit = 1'($urandom);
    end
    chk(gmm_enable == (policy != POL_LRU), "gmm_enable");
  end
  always @(posedge clk) if (rst_n && cc_rsp_valid && cc_rsp_ready) begin
    if (!cc_rsp_data.hit && policy != POL_LRU) begin exp_gp.push_back(at_cc[0]); e_gmm++; end
    void'(at_cc.pop_front());
    n_res++;
    #1 cc_rsp_valid = 0;
  end
  always @(posedge clk) if (rst_n && res_valid) chk(res_hit == cc_rsp_data.hit, "res_hit");

  // policy engine model: score = low bits of the page index plus timestamp
  req_t gp_q[$];
  always @(posedge clk) if (rst_n) begin
    if (gp_trc_valid && gp_trc_ready) begin
      chk(exp_gp.size() > 0 && gp_trc_data == exp_gp[0], "request sent to the GMM");
      if (exp_gp.size() > 0) void'(exp_gp.pop_front());
      gp_q.push_back(gp_trc_data);
      n_gp++;
    end
  end
  always @(negedge clk) begin
    if (!gp_rsp_valid && gp_q.size() > 0) begin
      gp_rsp_valid = 1;
      gp_rsp_data = score_t'(page_index(gp_q[0].pa)) + score_t'(gp_q[0].ts);
      void'(gp_q.pop_front());
      exp_scr.push_back(gp_rsp_data);
    end
    cc_scr_ready = $urandom_range(1);
    gp_trc_ready = (gp_q.size() < 2);
  end
  always @(posedge clk) if (rst_n && gp_rsp_valid && gp_rsp_ready) #1 gp_rsp_valid = 0;
  always @(posedge clk) if (rst_n && cc_scr_valid && cc_scr_ready) begin
    chk(exp_scr.size() > 0 && cc_scr_data == exp_scr[0], "score passed on");
    if (exp_scr.size() > 0) void'(exp_scr.pop_front());
    n_scr++;
  end

  initial begin
    #800000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    policy = POL_LRU; ts_from_trace = 0; in_valid = 0; in_data = '0; cc_rsp_valid = 0; cc_rsp_data = '0;
    gp_rsp_valid = 0; gp_rsp_data = 0; cc_scr_ready = 0; gp_trc_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 8; p++) begin
      for (int n = 0; n < 100; n++) begin
        @(negedge clk);
        in_valid = 1;
        in_data = '{wr: 1'($urandom), pa: {4'b0, $urandom, 12'($urandom)}, time_raw: $urandom};
        sent.push_back(in_data);
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        n_in++;
        #1 in_valid = 0;
      end
      while (n_res < n_in || n_scr < e_gmm) @(negedge clk);
      policy = policy_e'((p + 1) % 4);
      ts_from_trace = (p + 1 >= 4);
    end
    chk(n_cc == n_in && n_gp == e_gmm && n_gmm_req == 32'(e_gmm) && e_gmm > 0, "totals");
    $display("requests %0d (cache %0d), sent to GMM %0d, expected %0d, counted %0d", n_in, n_cc, n_gp, e_gmm, n_gmm_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
