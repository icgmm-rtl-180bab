// tb_cache_policy_engine: the whole GMM policy engine at its default size (256
// Gaussians). Random Gaussians are loaded; requests are fed while the engine is
// opened and closed at random. Every score must equal the bit-exact reference
// GMM score of the request's page index and timestamp, come out in order, and
// take NUM_G + 7 = 263 cycles from acceptance when the output is not stalled.
`timescale 1ns/1ps
module tb_cache_policy_engine;
  import icgmm_pkg::*;
  import icgmm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic enable, ld_en, trc_valid, trc_ready, rsp_valid, rsp_ready, busy;
  logic [7:0] ld_addr;
  gauss_t ld_data;
  req_t trc_data;
  score_t rsp_score;
  logic [31:0] n_infer;
  cache_policy_engine dut (.*);

  int checks = 0, failures = 0;
  gauss_t g[$];
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    enable = 0; ld_en = 0; ld_addr = 0; ld_data = '0; trc_valid = 0; trc_data = '0; rsp_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NUM_GAUSS; k++) begin
      g.push_back(rand_gauss(36'h5000, 4000, 2000, 300.0, 80.0, 2000));
      @(negedge clk); ld_en = 1; ld_addr = 8'(k); ld_data = g[k];
    end
    @(negedge clk); ld_en = 0;
    for (int n = 0; n < 24; n++) begin
      longint unsigned e;
      int t0, lat;
      trc_data = '{wr: 1'($urandom), pa: {PI_W'(36'h5000 + $urandom_range(4200)), 12'($urandom)},
                   ts: TS_W'($urandom_range(2100))};
      trc_valid = 1;
      enable = 0;
      repeat ($urandom_range(3)) begin
        @(negedge clk);
        checks++; if (trc_ready) begin failures++; $display("taken while closed"); end
      end
      enable = 1;
      #1;
      while (!trc_ready) begin @(negedge clk); #1; end
      @(posedge clk); t0 = $time;
      @(negedge clk); trc_valid = 0;
      if (n % 4 == 3) enable = 0;       // closing must not lose this score
      while (!rsp_valid) @(negedge clk);
      lat = ($time - t0 + 2) / 4;
      e = ref_score(g, page_index(trc_data.pa), trc_data.ts);
      checks++;
      if (longint'(rsp_score) != e) begin failures++; $display("score %h expected %h", rsp_score, e); end
      checks++;
      if (lat != NUM_GAUSS + 7) begin failures++; $display("latency %0d", lat); end
      @(negedge clk);
    end
    checks++;
    if (n_infer != 24) begin failures++; $display("n_infer %0d", n_infer); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
