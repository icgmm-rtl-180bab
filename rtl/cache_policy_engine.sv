// cache_policy_engine: the GMM-based cache policy engine, a free-running kernel.
//
// It waits on its trace FIFO; for every request it receives (the controller sends
// only cache misses) it computes the GMM score of the requested page and returns
// it on the score output. Inside are the control block (FIFO gating and trace
// decode), the weight buffer holding all NUM_G Gaussians, and the GMM PE. The
// weight buffer is written once through the load port before the engine is opened.
// Timing: one score every NUM_G + 7 cycles, with no extra latency from the
// control block.
module cache_policy_engine
  import icgmm_pkg::*;
#(
  parameter int unsigned NUM_G     = NUM_GAUSS,
  parameter int unsigned ACC_DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  input  logic                     ld_en,
  input  logic [$clog2(NUM_G)-1:0] ld_addr,
  input  gauss_t                   ld_data,
  input  logic                     trc_valid,
  output logic                     trc_ready,
  input  req_t                     trc_data,
  output logic                     rsp_valid,
  input  logic                     rsp_ready,
  output score_t                   rsp_score,
  output logic                     busy,
  output logic [31:0]              n_infer
);
  logic                     pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
  logic [PI_W-1:0]          pe_in_p;
  logic [TS_W-1:0]          pe_in_t;
  score_t                   pe_out_score;
  logic                     wb_rd_en;
  logic [$clog2(NUM_G)-1:0] wb_rd_addr;
  gauss_t                   wb_rd_data;

  policy_control_block u_ctrl (
    .clk, .rst_n, .enable,
    .trc_valid, .trc_ready, .trc_data,
    .rsp_valid, .rsp_ready, .rsp_score,
    .pe_in_valid, .pe_in_ready, .pe_in_p, .pe_in_t,
    .pe_out_valid, .pe_out_ready, .pe_out_score,
    .busy, .n_infer);

  gmm_weight_buffer #(.NUM_G(NUM_G)) u_wbuf (
    .clk, .ld_en, .ld_addr, .ld_data,
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data));

  gmm_pe #(.NUM_G(NUM_G), .ACC_DEPTH(ACC_DEPTH)) u_pe (
    .clk, .rst_n,
    .in_valid(pe_in_valid), .in_ready(pe_in_ready), .in_p(pe_in_p), .in_t(pe_in_t),
    .out_valid(pe_out_valid), .out_ready(pe_out_ready), .out_score(pe_out_score),
    .wb_rd_en, .wb_rd_addr, .wb_rd_data);
endmodule
