// icgmm_top: ICGMM, a hardware-managed DRAM cache in front of an SSD used as CXL
// memory expansion, with a Gaussian-mixture (GMM) cache policy.
//
// Three modules run side by side and talk only through FIFOs (a dataflow design):
//   signal_controller    takes host memory requests [R/W, PA, Time] from the trace
//                        FIFO, timestamps them and routes requests, hit/miss
//                        responses and GMM scores between the two engines;
//   cache_control_engine decides hit or miss on the 8-way DRAM cache, caches or
//                        bypasses missed pages, evicts, and emulates SSD latency;
//   cache_policy_engine  free-running GMM kernel that scores each missed page.
// FIFOs: trace (from the trace memory), cc_trc / cc_scr / cc_rsp (controller <->
// cache control engine: request, score, hit/miss), gp_trc / gp_rsp (controller <->
// policy engine: request, score).
// Interface: `policy` and `threshold` configure the cache policy, and
// `ts_from_trace` selects the trace's own Time field (1) or the window counter
// in the controller (0) as the GMM timestamp; all three must be held while
// requests are in flight; the GMM parameters are loaded once through ld_*
// before requests arrive; requests enter through trc_*; each finished lookup
// raises res_valid with res_hit; the counters give miss rate and service time.
// init_done rises NUM_SETS cycles after reset, when the tag table is clear.
// The trace memory, the host, the SSD and the CXL link are outside this module.
// Defaults are the paper's: 64 MB cache of 4 KB blocks, 8 ways (2048 sets), 256
// Gaussians, 75 us / 900 us SSD read / write at 233 MHz; FIFO depths are this
// design's.
module icgmm_top
  import icgmm_pkg::*;
#(
  parameter int unsigned NUM_SETS     = SETS,
  parameter int unsigned NUM_G        = NUM_GAUSS,
  parameter int unsigned READ_CYC     = SSD_READ_CYC,
  parameter int unsigned WRITE_CYC    = SSD_WRITE_CYC,
  parameter int unsigned LEN_WINDOW_P = LEN_WINDOW,
  parameter int unsigned LEN_SHOT_P   = LEN_SHOT,
  parameter int unsigned FIFO_DEPTH   = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  policy_e                  policy,
  input  score_t                   threshold,
  input  logic                     ts_from_trace,
  input  logic                     ld_en,
  input  logic [$clog2(NUM_G)-1:0] ld_addr,
  input  gauss_t                   ld_data,
  input  logic                     trc_valid,
  output logic                     trc_ready,
  input  trace_t                   trc_data,
  output logic                     init_done,
  output logic                     res_valid,
  output logic                     res_hit,
  output logic [31:0]              n_req,
  output logic [31:0]              n_hit,
  output logic [31:0]              n_miss,
  output logic [31:0]              n_bypass,
  output logic [31:0]              n_evict,
  output logic [31:0]              n_dirty_wb,
  output logic [31:0]              n_gmm_req,
  output logic [31:0]              n_infer,
  output logic [47:0]              busy_cycles,
  output logic [47:0]              ssd_cycles
);

  // trace FIFO (trace memory -> controller)
  logic   tf_valid, tf_ready;
  trace_t tf_data;
  // controller <-> cache control engine
  logic   cc_trc_valid_c, cc_trc_ready_c, cc_trc_valid_e, cc_trc_ready_e;
  req_t   cc_trc_data_c, cc_trc_data_e;
  logic   cc_scr_valid_c, cc_scr_ready_c, cc_scr_valid_e, cc_scr_ready_e;
  score_t cc_scr_data_c, cc_scr_data_e;
  logic   cc_rsp_valid_c, cc_rsp_ready_c, cc_rsp_valid_e, cc_rsp_ready_e;
  rsp_t   cc_rsp_data_c, cc_rsp_data_e;
  // controller <-> policy engine
  logic   gmm_enable, gp_busy;
  logic   gp_trc_valid_c, gp_trc_ready_c, gp_trc_valid_e, gp_trc_ready_e;
  req_t   gp_trc_data_c, gp_trc_data_e;
  logic   gp_rsp_valid_c, gp_rsp_ready_c, gp_rsp_valid_e, gp_rsp_ready_e;
  score_t gp_rsp_data_c, gp_rsp_data_e;

  sync_fifo #(.T(trace_t), .DEPTH(FIFO_DEPTH)) u_trace_fifo (
    .clk, .rst_n, .in_valid(trc_valid), .in_ready(trc_ready), .in_data(trc_data),
    .out_valid(tf_valid), .out_ready(tf_ready), .out_data(tf_data), .count());

  signal_controller #(.PEND_DEPTH(2 * FIFO_DEPTH + 2), .LEN_WINDOW_P(LEN_WINDOW_P),
                      .LEN_SHOT_P(LEN_SHOT_P)) u_ctrl (
    .clk, .rst_n, .policy, .ts_from_trace,
    .in_valid(tf_valid), .in_ready(tf_ready), .in_data(tf_data),
    .cc_trc_valid(cc_trc_valid_c), .cc_trc_ready(cc_trc_ready_c), .cc_trc_data(cc_trc_data_c),
    .cc_rsp_valid(cc_rsp_valid_c), .cc_rsp_ready(cc_rsp_ready_c), .cc_rsp_data(cc_rsp_data_c),
    .cc_scr_valid(cc_scr_valid_c), .cc_scr_ready(cc_scr_ready_c), .cc_scr_data(cc_scr_data_c),
    .gmm_enable,
    .gp_trc_valid(gp_trc_valid_c), .gp_trc_ready(gp_trc_ready_c), .gp_trc_data(gp_trc_data_c),
    .gp_rsp_valid(gp_rsp_valid_c), .gp_rsp_ready(gp_rsp_ready_c), .gp_rsp_data(gp_rsp_data_c),
    .res_valid, .res_hit, .n_gmm_req);

  // cache control engine side FIFOs
  sync_fifo #(.T(req_t), .DEPTH(FIFO_DEPTH)) u_cc_trc_fifo (
    .clk, .rst_n, .in_valid(cc_trc_valid_c), .in_ready(cc_trc_ready_c), .in_data(cc_trc_data_c),
    .out_valid(cc_trc_valid_e), .out_ready(cc_trc_ready_e), .out_data(cc_trc_data_e), .count());
  sync_fifo #(.T(score_t), .DEPTH(FIFO_DEPTH)) u_cc_scr_fifo (
    .clk, .rst_n, .in_valid(cc_scr_valid_c), .in_ready(cc_scr_ready_c), .in_data(cc_scr_data_c),
    .out_valid(cc_scr_valid_e), .out_ready(cc_scr_ready_e), .out_data(cc_scr_data_e), .count());
  sync_fifo #(.T(rsp_t), .DEPTH(FIFO_DEPTH)) u_cc_rsp_fifo (
    .clk, .rst_n, .in_valid(cc_rsp_valid_e), .in_ready(cc_rsp_ready_e), .in_data(cc_rsp_data_e),
    .out_valid(cc_rsp_valid_c), .out_ready(cc_rsp_ready_c), .out_data(cc_rsp_data_c), .count());

  // policy engine side FIFOs
  sync_fifo #(.T(req_t), .DEPTH(FIFO_DEPTH)) u_gp_trc_fifo (
    .clk, .rst_n, .in_valid(gp_trc_valid_c), .in_ready(gp_trc_ready_c), .in_data(gp_trc_data_c),
    .out_valid(gp_trc_valid_e), .out_ready(gp_trc_ready_e), .out_data(gp_trc_data_e), .count());
  sync_fifo #(.T(score_t), .DEPTH(FIFO_DEPTH)) u_gp_rsp_fifo (
    .clk, .rst_n, .in_valid(gp_rsp_valid_e), .in_ready(gp_rsp_ready_e), .in_data(gp_rsp_data_e),
    .out_valid(gp_rsp_valid_c), .out_ready(gp_rsp_ready_c), .out_data(gp_rsp_data_c), .count());

  cache_control_engine #(.NUM_SETS(NUM_SETS), .READ_CYC(READ_CYC), .WRITE_CYC(WRITE_CYC)) u_cce (
    .clk, .rst_n, .policy, .threshold,
    .trc_valid(cc_trc_valid_e), .trc_ready(cc_trc_ready_e), .trc_data(cc_trc_data_e),
    .scr_valid(cc_scr_valid_e), .scr_ready(cc_scr_ready_e), .scr_data(cc_scr_data_e),
    .rsp_valid(cc_rsp_valid_e), .rsp_ready(cc_rsp_ready_e), .rsp_data(cc_rsp_data_e),
    .init_done, .n_req, .n_hit, .n_miss, .n_bypass, .n_evict, .n_dirty_wb,
    .busy_cycles, .ssd_cycles);

  cache_policy_engine #(.NUM_G(NUM_G)) u_cpe (
    .clk, .rst_n, .enable(gmm_enable),
    .ld_en, .ld_addr, .ld_data,
    .trc_valid(gp_trc_valid_e), .trc_ready(gp_trc_ready_e), .trc_data(gp_trc_data_e),
    .rsp_valid(gp_rsp_valid_e), .rsp_ready(gp_rsp_ready_e), .rsp_score(gp_rsp_data_e),
    .busy(gp_busy), .n_infer);
endmodule
