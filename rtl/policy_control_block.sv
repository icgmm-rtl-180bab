// policy_control_block: control block of the cache policy engine.
//
// The signal controller opens or closes the policy engine with `enable`. While
// open, the block takes one request at a time from the engine's trace FIFO,
// decodes it into the two GMM inputs (page index P = PA >> 12, window timestamp T),
// starts the GMM PE and pushes the returned score into the response FIFO. While
// closed, neither FIFO is touched, and the cache falls back to LRU. A computation
// already started when enable drops is finished and its score delivered, so no
// score is lost. `busy` is high from taking a request until its score is pushed;
// `n_infer` counts completed inferences.
// Timing: the trace is popped in the cycle the PE accepts it, and the score is
// pushed in the cycle the PE offers it, so the block adds no latency.
// Gating the FIFOs follows the paper; draining an in-flight score on disable is
// this design's choice (the paper does not say what happens then).
module policy_control_block
  import icgmm_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            enable,
  // trace FIFO (read side)
  input  logic            trc_valid,
  output logic            trc_ready,
  input  req_t            trc_data,
  // response FIFO (write side)
  output logic            rsp_valid,
  input  logic            rsp_ready,
  output score_t          rsp_score,
  // GMM PE
  output logic            pe_in_valid,
  input  logic            pe_in_ready,
  output logic [PI_W-1:0] pe_in_p,
  output logic [TS_W-1:0] pe_in_t,
  input  logic            pe_out_valid,
  output logic            pe_out_ready,
  input  score_t          pe_out_score,
  output logic            busy,
  output logic [31:0]     n_infer
);
  logic inflight;

  // decode the trace into GMM input format
  assign pe_in_p     = page_index(trc_data.pa);
  assign pe_in_t     = trc_data.ts;
  assign pe_in_valid = enable && trc_valid && !inflight;
  assign trc_ready   = enable && pe_in_ready && !inflight;

  assign rsp_valid    = inflight && pe_out_valid;
  assign rsp_score    = pe_out_score;
  assign pe_out_ready = inflight && rsp_ready;
  assign busy         = inflight;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      inflight <= 1'b0;
      n_infer  <= '0;
    end else begin
      if (pe_in_valid && pe_in_ready) inflight <= 1'b1;
      else if (rsp_valid && rsp_ready) begin
        inflight <= 1'b0;
        n_infer  <= n_infer + 1'b1;
      end
    end
  end

  a_closed_no_pop: assert property (@(posedge clk) disable iff (!rst_n)
    !enable |-> !trc_ready);
endmodule
