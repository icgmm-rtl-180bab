// tb_gmm_pe: self-checking test of the GMM processing element with its weight
// buffer. Random Gaussians are loaded; random (P, T) inputs are scored and the
// score is compared with (1) a bit-exact integer model of the documented number
// formats and (2) the real-valued mixture sum_k 2^-(quadratic form + l), within a
// tolerance. The latency (NUM_G + 7 cycles) is checked for each input.
`timescale 1ns/1ps
module tb_gmm_pe;
  import icgmm_pkg::*;
  localparam int unsigned NG = 16;
  localparam int unsigned GW = $clog2(NG);

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [PI_W-1:0] in_p;
  logic [TS_W-1:0] in_t;
  score_t out_score;
  logic wb_rd_en;
  logic [GW-1:0] wb_rd_addr;
  gauss_t wb_rd_data;
  logic ld_en;
  logic [GW-1:0] ld_addr;
  gauss_t ld_data;

  gmm_weight_buffer #(.NUM_G(NG)) u_wb (.clk, .ld_en, .ld_addr, .ld_data,
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data));
  gmm_pe #(.NUM_G(NG)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_p, .in_t,
    .out_valid, .out_ready, .out_score, .wb_rd_en, .wb_rd_addr, .wb_rd_data);

  int checks = 0, failures = 0;
  gauss_t g [NG];

  // bit-exact reference (independent integer arithmetic, 192-bit)
  function automatic longint unsigned ref_score(input logic [PI_W-1:0] p, input logic [TS_W-1:0] t);
    logic signed [191:0] dp, dt, q, e, sum;
    logic [191:0] term;
    real r;
    sum = 0;
    for (int k = 0; k < NG; k++) begin
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

  // real-valued mixture
  function automatic real real_score(input logic [PI_W-1:0] p, input logic [TS_W-1:0] t);
    real s = 0, dp, dt, q;
    for (int k = 0; k < NG; k++) begin
      dp = real'(p) - real'(g[k].mu_p);
      dt = real'(t) - real'(g[k].mu_t);
      q  = (real'(g[k].a) * dp * dp + real'(g[k].b) * dp * dt + real'(g[k].c) * dt * dt) / (2.0 ** COEF_FRAC);
      s  = s + 2.0 ** (-(q + real'(g[k].l) / 256.0));
    end
    return s;
  endfunction

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned exp_s;
    real rs, got;
    int t0, lat;
    in_valid = 0; out_ready = 0; ld_en = 0; ld_addr = 0; ld_data = '0; in_p = 0; in_t = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load random Gaussians: sigma_p 4..1000 pages, sigma_t 2..60 windows
    for (int k = 0; k < NG; k++) begin
      real sp, st, rho, det, ipp, ipt, itt;
      sp  = 4.0 + real'($urandom_range(996));
      st  = 2.0 + real'($urandom_range(58));
      rho = (real'($urandom_range(100)) - 50.0) / 100.0;
      det = sp*sp*st*st*(1.0 - rho*rho);
      ipp = st*st/det; itt = sp*sp/det; ipt = -rho*sp*st/det;
      g[k].mu_p = PI_W'(36'h1_0000 + $urandom_range(8000));
      g[k].mu_t = TS_W'($urandom_range(300));
      g[k].a = longint'(0.7213475 * ipp * (2.0 ** COEF_FRAC));
      g[k].b = longint'(1.4426950 * ipt * (2.0 ** COEF_FRAC));
      g[k].c = longint'(0.7213475 * itt * (2.0 ** COEF_FRAC));
      g[k].l = EXP_W'($urandom_range(1200));
      @(negedge clk); ld_en = 1; ld_addr = GW'(k); ld_data = g[k];
    end
    @(negedge clk); ld_en = 0;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      if (n < 20) begin   // near a mean
        automatic int k = $urandom_range(NG-1);
        in_p = g[k].mu_p + PI_W'($urandom_range(60)) - PI_W'(30);
        in_t = g[k].mu_t + TS_W'($urandom_range(6));
      end else begin
        in_p = PI_W'(36'h1_0000 + $urandom_range(9000));
        in_t = TS_W'($urandom_range(320));
      end
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk); t0 = $time;
      @(negedge clk); in_valid = 0;
      out_ready = (n % 3 != 0);
      while (!out_valid) @(negedge clk);
      lat = ($time - t0 + 2) / 4;
      checks++;
      if (lat != NG + 7) begin failures++; $display("latency %0d, expected %0d", lat, NG + 7); end
      repeat (n % 3 == 0 ? 2 : 0) @(negedge clk);
      out_ready = 1;
      exp_s = ref_score(in_p, in_t);
      rs = real_score(in_p, in_t);
      got = real'(out_score) / 16777216.0;
      checks++;
      if (longint'(out_score) != exp_s) begin
        failures++; $display("score mismatch n=%0d got %h exp %h", n, out_score, exp_s);
      end
      checks++;
      if ((got - rs) > 1e-3 + rs*0.01 || (rs - got) > 1e-3 + rs*0.01) begin
        failures++; $display("score %f far from real %f", got, rs);
      end
      @(negedge clk); out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
