// tb_policy_control_block: the control block between a trace FIFO model, a response
// FIFO model and a model of the GMM PE (fixed-delay, score = function of P and T).
// Checks the decode (P = PA >> 12, T = timestamp), that nothing is taken while
// closed, that a score in flight is still delivered after closing, the order of
// scores and the inference count.
`timescale 1ns/1ps
module tb_policy_control_block;
  import icgmm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic enable, trc_valid, trc_ready, rsp_valid, rsp_ready;
  req_t trc_data;
  score_t rsp_score, pe_out_score;
  logic pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready, busy;
  logic [PI_W-1:0] pe_in_p;
  logic [TS_W-1:0] pe_in_t;
  logic [31:0] n_infer;
  policy_control_block dut (.*);

  int checks = 0, failures = 0;
  // PE model: takes one input, answers 5 cycles later
  int pe_cnt = 0;
  logic pe_full = 0;
  assign pe_in_ready  = !pe_full;
  assign pe_out_valid = pe_full && pe_cnt == 0;
  always @(posedge clk) begin
    if (pe_in_valid && pe_in_ready) begin
      pe_full <= 1; pe_cnt <= 5;
      pe_out_score <= score_t'(pe_in_p * 3 + pe_in_t);
    end else if (pe_full && pe_cnt > 0) pe_cnt <= pe_cnt - 1;
    else if (pe_out_valid && pe_out_ready) pe_full <= 0;
  end

  score_t exp_q[$];
  int got = 0;
  always @(posedge clk) if (rst_n) begin
    if (!enable && trc_ready) begin checks++; failures++; $display("pop while closed"); end
    if (rsp_valid && rsp_ready) begin
      checks++;
      if (exp_q.size() == 0 || rsp_score != exp_q[0]) begin
        failures++; $display("score %0d unexpected", rsp_score);
      end else void'(exp_q.pop_front());
      got++;
    end
    if (trc_valid && trc_ready) exp_q.push_back(score_t'(page_index(trc_data.pa) * 3 + trc_data.ts));
  end

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int sent = 0;
    enable = 0; trc_valid = 0; trc_data = '0; rsp_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (sent < 60) begin
      @(negedge clk);
      if (!trc_valid || trc_ready) begin end
      enable    = ($urandom_range(9) != 0);
      rsp_ready = ($urandom_range(2) != 0);
      if (!trc_valid) begin
        trc_valid = 1;
        trc_data = '{wr: 1'($urandom), pa: {4'b0, $urandom, 12'($urandom)}, ts: TS_W'($urandom_range(9999))};
      end
      @(posedge clk);
      if (trc_valid && trc_ready) begin sent++; #1 trc_valid = 0; end
    end
    @(negedge clk); trc_valid = 0; rsp_ready = 1; enable = 0;   // close with one in flight
    repeat (20) @(negedge clk);
    checks++;
    if (got != 60 || n_infer != 60 || busy) begin
      failures++; $display("got %0d scores, n_infer %0d", got, n_infer);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
