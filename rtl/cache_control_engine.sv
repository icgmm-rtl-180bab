// cache_control_engine: the cache control engine of ICGMM.
//
// It joins the cache management module, the on-chip set buffer, the tag and score
// table of the DRAM cache and the SSD access latency emulator, wired as in the
// source design: the management module addresses one set of the table, the set is
// copied into the buffer for the parallel compare and copied back after an update,
// and the emulator pauses the management module on a miss.
// Interface: requests come in through the trace FIFO port, GMM scores through the
// score FIFO port; a hit/miss response per request leaves through the response
// port. Timing and policy are those of cache_mgmt; before the first request the
// table is cleared, which takes NUM_SETS cycles after reset.
module cache_control_engine
  import icgmm_pkg::*;
#(
  parameter int unsigned NUM_SETS  = SETS,
  parameter int unsigned READ_CYC  = SSD_READ_CYC,
  parameter int unsigned WRITE_CYC = SSD_WRITE_CYC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  policy_e     policy,
  input  score_t      threshold,
  input  logic        trc_valid,
  output logic        trc_ready,
  input  req_t        trc_data,
  input  logic        scr_valid,
  output logic        scr_ready,
  input  score_t      scr_data,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output rsp_t        rsp_data,
  output logic        init_done,
  output logic [31:0] n_req,
  output logic [31:0] n_hit,
  output logic [31:0] n_miss,
  output logic [31:0] n_bypass,
  output logic [31:0] n_evict,
  output logic [31:0] n_dirty_wb,
  output logic [47:0] busy_cycles,
  output logic [47:0] ssd_cycles
);
  localparam int unsigned SW = $clog2(NUM_SETS);

  logic          ts_rd_en, ts_wr_en;
  logic [SW-1:0] ts_set;
  set_t          ts_rd_data, buf_set;
  logic          buf_load_en, buf_evict_gmm, buf_touch_en, buf_fill_en, buf_upd_wr;
  logic [PI_W-1:0] buf_lookup_tag;
  way_idx_t      buf_upd_way, buf_hit_way, buf_victim_way;
  score_t        buf_fill_score;
  logic          buf_hit, buf_victim_valid, buf_victim_dirty;
  logic          ssd_start, ssd_is_write, ssd_busy, ssd_done;

  tag_store #(.NUM_SETS(NUM_SETS)) u_table (
    .clk, .rst_n, .init_done,
    .rd_en(ts_rd_en), .rd_set(ts_set), .rd_data(ts_rd_data),
    .wr_en(ts_wr_en), .wr_set(ts_set), .wr_data(buf_set));

  tag_score_buffer u_buf (
    .clk, .load_en(buf_load_en), .load_data(ts_rd_data),
    .lookup_tag(buf_lookup_tag), .evict_gmm(buf_evict_gmm),
    .touch_en(buf_touch_en), .fill_en(buf_fill_en), .upd_way(buf_upd_way),
    .upd_wr(buf_upd_wr), .fill_score(buf_fill_score),
    .set_q(buf_set), .hit(buf_hit), .hit_way(buf_hit_way),
    .victim_way(buf_victim_way), .victim_valid(buf_victim_valid),
    .victim_dirty(buf_victim_dirty));

  ssd_latency_emulator #(.READ_CYC(READ_CYC), .WRITE_CYC(WRITE_CYC)) u_ssd (
    .clk, .rst_n, .start(ssd_start), .is_write(ssd_is_write),
    .busy(ssd_busy), .done(ssd_done), .busy_cycles(ssd_cycles));

  cache_mgmt #(.NUM_SETS(NUM_SETS)) u_mgmt (
    .clk, .rst_n, .policy, .threshold,
    .trc_valid, .trc_ready, .trc_data,
    .scr_valid, .scr_ready, .scr_data,
    .rsp_valid, .rsp_ready, .rsp_data,
    .ts_init_done(init_done), .ts_rd_en, .ts_wr_en, .ts_set,
    .buf_load_en, .buf_lookup_tag, .buf_evict_gmm, .buf_touch_en, .buf_fill_en,
    .buf_upd_way, .buf_upd_wr, .buf_fill_score,
    .buf_hit, .buf_hit_way, .buf_victim_way, .buf_victim_valid, .buf_victim_dirty,
    .ssd_start, .ssd_is_write, .ssd_busy,
    .n_req, .n_hit, .n_miss, .n_bypass, .n_evict, .n_dirty_wb, .busy_cycles);
endmodule
