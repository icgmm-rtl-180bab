// tb_cache_mgmt: the cache management module with its table, set buffer and SSD
// emulator (4 sets, 20 / 50 cycle SSD). The testbench plays the three FIFOs:
// it offers requests, answers each miss with a score a few cycles later, and
// takes responses. Every request is checked against the policy model
// (icgmm_ref_pkg::cache_model): hit or miss, and the exact number of busy cycles,
// which follows from the documented timing (hit 3, clean miss R+5, dirty
// write-back R+W+6, bypassed read R+3, bypassed write R+W+4). All four policies run
// in turn on a warm cache.
`timescale 1ns/1ps
module tb_cache_mgmt;
  import icgmm_pkg::*;
  import icgmm_ref_pkg::*;
  localparam int unsigned NS = 4, R = 20, W = 50;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  policy_e policy;
  score_t threshold;
  logic trc_valid, trc_ready, scr_valid, scr_ready, rsp_valid, rsp_ready;
  req_t trc_data;
  score_t scr_data;
  rsp_t rsp_data;
  logic init_done, ts_rd_en, ts_wr_en;
  logic [1:0] ts_set;
  set_t ts_rd_data, buf_set;
  logic buf_load_en, buf_evict_gmm, buf_touch_en, buf_fill_en, buf_upd_wr;
  logic [PI_W-1:0] buf_lookup_tag;
  way_idx_t buf_upd_way, buf_hit_way, buf_victim_way;
  score_t buf_fill_score;
  logic buf_hit, buf_victim_valid, buf_victim_dirty;
  logic ssd_start, ssd_is_write, ssd_busy, ssd_done;
  logic [47:0] ssd_cycles;
  logic [31:0] n_req, n_hit, n_miss, n_bypass, n_evict, n_dirty_wb;
  logic [47:0] busy_cycles;

  tag_store #(.NUM_SETS(NS)) u_table (.clk, .rst_n, .init_done,
    .rd_en(ts_rd_en), .rd_set(ts_set), .rd_data(ts_rd_data),
    .wr_en(ts_wr_en), .wr_set(ts_set), .wr_data(buf_set));
  tag_score_buffer u_buf (.clk, .load_en(buf_load_en), .load_data(ts_rd_data),
    .lookup_tag(buf_lookup_tag), .evict_gmm(buf_evict_gmm), .touch_en(buf_touch_en),
    .fill_en(buf_fill_en), .upd_way(buf_upd_way), .upd_wr(buf_upd_wr),
    .fill_score(buf_fill_score), .set_q(buf_set), .hit(buf_hit), .hit_way(buf_hit_way),
    .victim_way(buf_victim_way), .victim_valid(buf_victim_valid), .victim_dirty(buf_victim_dirty));
  ssd_latency_emulator #(.READ_CYC(R), .WRITE_CYC(W)) u_ssd (.clk, .rst_n,
    .start(ssd_start), .is_write(ssd_is_write), .busy(ssd_busy), .done(ssd_done),
    .busy_cycles(ssd_cycles));
  cache_mgmt #(.NUM_SETS(NS)) dut (.clk, .rst_n, .policy, .threshold,
    .trc_valid, .trc_ready, .trc_data, .scr_valid, .scr_ready, .scr_data,
    .rsp_valid, .rsp_ready, .rsp_data, .ts_init_done(init_done), .ts_rd_en, .ts_wr_en, .ts_set,
    .buf_load_en, .buf_lookup_tag, .buf_evict_gmm, .buf_touch_en, .buf_fill_en,
    .buf_upd_way, .buf_upd_wr, .buf_fill_score, .buf_hit, .buf_hit_way, .buf_victim_way,
    .buf_victim_valid, .buf_victim_dirty, .ssd_start, .ssd_is_write, .ssd_busy,
    .n_req, .n_hit, .n_miss, .n_bypass, .n_evict, .n_dirty_wb, .busy_cycles);

  int checks = 0, failures = 0;
  int seen[string];
  cache_model m;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one_request(input policy_e pol, input longint pi, input bit wr,
                             input longint unsigned sc);
    int exp_busy;
    logic [47:0] b0;
    m.access(pol, 50, pi, wr, sc);
    if (m.last_hit) exp_busy = 3;
    else if (m.last_bypass) exp_busy = wr ? R + W + 4 : R + 3;
    else exp_busy = m.last_dirty_wb ? R + W + 6 : R + 5;
    seen[m.last_hit ? "hit" : "miss"]++;
    if (m.last_bypass) seen["bypass"]++;
    if (m.last_dirty_wb) seen["dirty_wb"]++;
    if (m.last_evict) seen[(pol == POL_GMM_EVICT || pol == POL_GMM_BOTH) ? "gmm_evict" : "lru_evict"]++;
    b0 = busy_cycles;
    @(negedge clk);
    trc_valid = 1;
    trc_data = '{wr: wr, pa: {PI_W'(pi), 12'($urandom)}, ts: TS_W'($urandom)};
    #1;
    while (!trc_ready) begin @(negedge clk); #1; end
    @(negedge clk); trc_valid = 0;
    // response
    while (!rsp_valid) @(negedge clk);
    checks++;
    if (rsp_data.hit != m.last_hit) begin failures++; $display("hit %0d expected %0d", rsp_data.hit, m.last_hit); end
    if (!rsp_data.hit && pol != POL_LRU) begin
      repeat ($urandom_range(R - 5)) @(negedge clk);
      scr_valid = 1; scr_data = score_t'(sc);
      #1;
      while (!scr_ready) begin @(negedge clk); #1; end
      @(negedge clk); scr_valid = 0;
    end
    while (!trc_ready) @(negedge clk);
    checks++;
    if (busy_cycles - b0 != 48'(exp_busy)) begin
      failures++; $display("busy %0d expected %0d (hit %0d bypass %0d wb %0d)", busy_cycles - b0,
                           exp_busy, m.last_hit, m.last_bypass, m.last_dirty_wb);
    end
  endtask

  initial begin
    int nreq = 0;
    policy = POL_LRU; threshold = 50; trc_valid = 0; trc_data = '0; scr_valid = 0; scr_data = 0;
    rsp_ready = 1;
    m = new(NS);
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (seen[k]) seen[k] = 0;
    for (int p = 0; p < 4; p++) begin
      policy = policy_e'(p);
      for (int n = 0; n < 120; n++) begin
        one_request(policy_e'(p), longint'($urandom_range(($urandom_range(2) == 0) ? 79 : 39)),
                    ($urandom_range(2) == 0), longint'($urandom_range(100)));
        nreq++;
      end
    end
    checks++;
    if (n_req != 32'(nreq) || n_hit + n_miss != n_req) begin failures++; $display("counters"); end
    foreach (seen[k]) $display("%s: %0d", k, seen[k]);
    checks++;
    if (!(seen.exists("hit") && seen.exists("bypass") && seen.exists("dirty_wb") &&
          seen.exists("gmm_evict") && seen.exists("lru_evict"))) begin
      failures++; $display("a case was not reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
