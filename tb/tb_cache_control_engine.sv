// tb_cache_control_engine: the cache control engine (8 sets, 30 / 70 cycle SSD)
// under random traffic, with the response port stalled at random and GMM scores
// arriving before or after the emulated SSD read. The hit/miss sequence, all
// counters and the total emulated SSD time are checked against the policy model.
`timescale 1ns/1ps
module tb_cache_control_engine;
  import icgmm_pkg::*;
  import icgmm_ref_pkg::*;
  localparam int unsigned NS = 8, R = 30, W = 70;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  policy_e policy;
  score_t threshold;
  logic trc_valid, trc_ready, scr_valid, scr_ready, rsp_valid, rsp_ready, init_done;
  req_t trc_data;
  score_t scr_data;
  rsp_t rsp_data;
  logic [31:0] n_req, n_hit, n_miss, n_bypass, n_evict, n_dirty_wb;
  logic [47:0] busy_cycles, ssd_cycles;
  cache_control_engine #(.NUM_SETS(NS), .READ_CYC(R), .WRITE_CYC(W)) dut (.*);

  int checks = 0, failures = 0;
  cache_model m;
  longint e_hit = 0, e_miss = 0, e_byp = 0, e_ev = 0, e_wb = 0, e_ssd = 0;

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    policy = POL_LRU; threshold = 1000; trc_valid = 0; trc_data = '0; scr_valid = 0;
    scr_data = 0; rsp_ready = 0;
    m = new(NS);
    repeat (2) @(posedge clk); rst_n = 1;
    wait (init_done);
    for (int p = 0; p < 4; p++) begin
      policy = policy_e'(p);
      for (int n = 0; n < 150; n++) begin
        automatic longint pi = longint'($urandom_range(($urandom_range(3) == 0) ? 255 : 100));
        automatic bit wr = ($urandom_range(3) == 0);
        automatic longint unsigned sc = longint'($urandom_range(2000));
        m.access(policy, 1000, pi, wr, sc);
        if (m.last_hit) e_hit++; else begin e_miss++; e_ssd += R; end
        if (m.last_bypass) begin e_byp++; if (wr) e_ssd += W; end
        if (m.last_evict) e_ev++;
        if (m.last_dirty_wb) begin e_wb++; e_ssd += W; end
        @(negedge clk);
        trc_valid = 1;
        trc_data = '{wr: wr, pa: {PI_W'(pi), 12'($urandom)}, ts: TS_W'($urandom)};
        #1;
        while (!trc_ready) begin @(negedge clk); #1; end
        @(negedge clk); trc_valid = 0;
        repeat ($urandom_range(4)) @(negedge clk);      // response stalled
        rsp_ready = 1;
        #1;
        while (!rsp_valid) begin @(negedge clk); #1; end
        chk(rsp_data.hit == m.last_hit, $sformatf("hit %0d expected %0d", rsp_data.hit, m.last_hit));
        @(negedge clk); rsp_ready = 0;
        if (!m.last_hit && policy != POL_LRU) begin
          repeat ($urandom_range(R + 20)) @(negedge clk); // before or after the SSD read
          scr_valid = 1; scr_data = score_t'(sc);
          #1;
          while (!scr_ready) begin @(negedge clk); #1; end
          @(negedge clk); scr_valid = 0;
        end
      end
      while (!trc_ready) @(negedge clk);
    end
    chk(n_hit == 32'(e_hit) && n_miss == 32'(e_miss), "hit/miss counters");
    chk(n_bypass == 32'(e_byp), "bypass counter");
    chk(n_evict == 32'(e_ev), "evict counter");
    chk(n_dirty_wb == 32'(e_wb), "dirty write-back counter");
    chk(ssd_cycles == 48'(e_ssd), $sformatf("ssd cycles %0d expected %0d", ssd_cycles, e_ssd));
    chk(e_byp > 0 && e_wb > 0 && e_ev > 0, "cases reached");
    $display("hit %0d miss %0d bypass %0d evict %0d wb %0d", e_hit, e_miss, e_byp, e_ev, e_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
