// signal_controller: the central controller between the trace memory, the cache
// control engine and the cache policy engine.
//
// It manages the flow of data in the dataflow architecture:
//   - it takes each trace [R/W, PA, Time] from the trace FIFO of the trace memory,
//     gives it its window timestamp and forwards it at once to the cache control
//     engine, so the next request is already queued while the engine compares
//     tags. With ts_from_trace = 1 the timestamp is the trace's own Time field
//     (low TS_W bits), for traces whose windows were assigned offline as in the
//     source design's preprocessing; with ts_from_trace = 0 the same window rule
//     (timestamp_transform) is applied here to the live request stream;
//   - it keeps a copy of each forwarded request in a pending queue, in order;
//   - for each hit/miss response it retires the oldest pending request; on a miss
//     with the GMM engine open it forwards that request to the policy engine's
//     trace FIFO, and the engine scores it while the SSD read is emulated;
//   - it passes every score from the policy engine's response FIFO on to the
//     cache control engine's score FIFO;
//   - it opens the policy engine (gmm_enable) for every policy except plain LRU.
// It also reports each finished lookup (res_valid, res_hit) and counts requests
// sent to the GMM (n_gmm_req).
// Timing: a trace passes in the cycle it is offered if the cache engine's FIFO and
// the pending queue have room; responses and scores pass combinationally.
// The policy and ts_from_trace must stay constant while requests are in flight. The routing follows
// the figure of the source design; the pending queue and the depth PEND_DEPTH are
// this design's (the figure shows only R/W and Time going to the policy engine,
// but the text makes the page index a GMM input, so the whole request is sent).
module signal_controller
  import icgmm_pkg::*;
#(
  parameter int unsigned PEND_DEPTH   = 4,
  parameter int unsigned LEN_WINDOW_P = LEN_WINDOW,
  parameter int unsigned LEN_SHOT_P   = LEN_SHOT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  policy_e     policy,
  input  logic        ts_from_trace,   // 1: use in_data.time_raw as the timestamp
  // trace FIFO from the trace memory
  input  logic        in_valid,
  output logic        in_ready,
  input  trace_t      in_data,
  // to the cache control engine
  output logic        cc_trc_valid,
  input  logic        cc_trc_ready,
  output req_t        cc_trc_data,
  input  logic        cc_rsp_valid,
  output logic        cc_rsp_ready,
  input  rsp_t        cc_rsp_data,
  output logic        cc_scr_valid,
  input  logic        cc_scr_ready,
  output score_t      cc_scr_data,
  // to the cache policy engine
  output logic        gmm_enable,
  output logic        gp_trc_valid,
  input  logic        gp_trc_ready,
  output req_t        gp_trc_data,
  input  logic        gp_rsp_valid,
  output logic        gp_rsp_ready,
  input  score_t      gp_rsp_data,
  // observation
  output logic        res_valid,
  output logic        res_hit,
  output logic [31:0] n_gmm_req
);
  logic            fwd, pend_in_ready, pend_valid, need_gmm;
  req_t            pend_head;
  logic [TS_W-1:0] ts;
  logic [$clog2(PEND_DEPTH+1)-1:0] pend_count;

  timestamp_transform #(.LEN_WINDOW_P(LEN_WINDOW_P), .LEN_SHOT_P(LEN_SHOT_P)) u_ts (
    .clk, .rst_n, .req_fire(fwd), .ts_out(ts));

  assign gmm_enable   = (policy != POL_LRU);
  assign cc_trc_data  = '{wr: in_data.wr, pa: in_data.pa,
                          ts: ts_from_trace ? in_data.time_raw[TS_W-1:0] : ts};
  assign cc_trc_valid = in_valid && pend_in_ready;
  assign in_ready     = cc_trc_ready && pend_in_ready;
  assign fwd          = in_valid && in_ready;

  sync_fifo #(.T(req_t), .DEPTH(PEND_DEPTH)) u_pend (
    .clk, .rst_n,
    .in_valid(fwd), .in_ready(pend_in_ready), .in_data(cc_trc_data),
    .out_valid(pend_valid), .out_ready(cc_rsp_valid && cc_rsp_ready),
    .out_data(pend_head), .count(pend_count));

  // a miss under a GMM policy needs a score for its request
  assign need_gmm     = gmm_enable && !cc_rsp_data.hit;
  assign cc_rsp_ready = pend_valid && (!need_gmm || gp_trc_ready);
  assign gp_trc_valid = cc_rsp_valid && pend_valid && need_gmm;
  assign gp_trc_data  = pend_head;

  assign cc_scr_valid = gp_rsp_valid;
  assign cc_scr_data  = gp_rsp_data;
  assign gp_rsp_ready = cc_scr_ready;

  assign res_valid = cc_rsp_valid && cc_rsp_ready;
  assign res_hit   = cc_rsp_data.hit;

  always_ff @(posedge clk) begin
    if (!rst_n)                          n_gmm_req <= '0;
    else if (gp_trc_valid && gp_trc_ready) n_gmm_req <= n_gmm_req + 1'b1;
  end

  a_rsp_has_request: assert property (@(posedge clk) disable iff (!rst_n)
    cc_rsp_valid |-> pend_valid);
endmodule
