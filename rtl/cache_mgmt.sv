// cache_mgmt: the cache management module of the cache control engine.
//
// For each request from its trace FIFO it decides hit or miss and manages the
// DRAM cache, following the ICGMM caching and eviction policies:
//   1. take the request; the set index is the low bits of the page index
//      (PA >> 12), the tag the bits above it;
//   2. read that set from the tag and score table into the set buffer (2 cycles);
//   3. compare all ways at once and push hit/miss into the response FIFO, which
//      tells the signal controller whether the GMM engine must score the page;
//   4. hit: mark the way most recently used (dirty on a write), write the set back;
//   5. miss: start the SSD latency emulator (page read) at once, so the GMM score
//      is computed in its shadow; wait for the read and, unless the policy is LRU,
//      for the score from the score FIFO. Then
//        - smart caching (POL_GMM_CACHE, POL_GMM_BOTH): cache the page only if
//          score >= threshold, otherwise send it to the host uncached (bypass);
//          other policies always cache;
//        - caching picks the victim in the set buffer (lowest score under
//          POL_GMM_EVICT and POL_GMM_BOTH, else LRU); a dirty victim is first
//          written back to the SSD (write latency), then the new page is filled
//          with its score and the set written back.
//      A bypassed write is a 64 B update of a 4 KB SSD page, so it costs a page
//      write after the page read.
// So a miss costs the 75 us read, plus 900 us if a dirty block is written back,
// matching the 75 us / 975 us penalties of the source design.
// Counters: requests, hits, misses, bypasses, evictions of valid blocks, dirty
// write-backs, and busy cycles (every cycle not idle, the service time summed over
// all requests: divided by n_req it gives the average access time).
// Timing (cycle 0 = the cycle the request is taken and its set read): the set is
// loaded into the buffer in cycle 1, compared and answered in cycle 2. A hit writes
// the set back in cycle 3 and the next request can be taken in cycle 4. Busy
// cycles per request, with R / W the emulator's read / write cycles and a score
// that arrives during the read: hit 3, clean miss R+5, miss with dirty write-back
// R+W+6, bypassed read R+3, bypassed write R+W+4. The policy rules and the overlap of GMM and SSD read follow the paper; the
// state machine, the set buffer handshakes and the bypassed-write cost are this
// design's choices.
module cache_mgmt
  import icgmm_pkg::*;
#(
  parameter int unsigned NUM_SETS = SETS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  policy_e                     policy,
  input  score_t                      threshold,
  // trace FIFO
  input  logic                        trc_valid,
  output logic                        trc_ready,
  input  req_t                        trc_data,
  // score FIFO
  input  logic                        scr_valid,
  output logic                        scr_ready,
  input  score_t                      scr_data,
  // response (hit/miss) FIFO
  output logic                        rsp_valid,
  input  logic                        rsp_ready,
  output rsp_t                        rsp_data,
  // tag and score table
  input  logic                        ts_init_done,
  output logic                        ts_rd_en,
  output logic                        ts_wr_en,
  output logic [$clog2(NUM_SETS)-1:0] ts_set,
  // set buffer
  output logic                        buf_load_en,
  output logic [PI_W-1:0]             buf_lookup_tag,
  output logic                        buf_evict_gmm,
  output logic                        buf_touch_en,
  output logic                        buf_fill_en,
  output way_idx_t                    buf_upd_way,
  output logic                        buf_upd_wr,
  output score_t                      buf_fill_score,
  input  logic                        buf_hit,
  input  way_idx_t                    buf_hit_way,
  input  way_idx_t                    buf_victim_way,
  input  logic                        buf_victim_valid,
  input  logic                        buf_victim_dirty,
  // SSD latency emulator
  output logic                        ssd_start,
  output logic                        ssd_is_write,
  input  logic                        ssd_busy,
  // statistics
  output logic [31:0]                 n_req,
  output logic [31:0]                 n_hit,
  output logic [31:0]                 n_miss,
  output logic [31:0]                 n_bypass,
  output logic [31:0]                 n_evict,
  output logic [31:0]                 n_dirty_wb,
  output logic [47:0]                 busy_cycles
);
  localparam int unsigned SW = $clog2(NUM_SETS);

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_CMP, S_MISS_WAIT, S_SSD_WR, S_FILL, S_WB
  } state_e;
  state_e state;

  req_t     req_q;
  logic     need_score_q, score_got_q, fill_after_q;
  score_t   score_q;
  way_idx_t victim_q;
  logic [PI_W-1:0] pi;

  // while idle the table is addressed by the request at the FIFO head
  assign pi             = page_index((state == S_IDLE) ? trc_data.pa : req_q.pa);
  assign ts_set         = pi[SW-1:0];
  assign buf_lookup_tag = pi >> SW;
  assign buf_evict_gmm  = (policy == POL_GMM_EVICT) || (policy == POL_GMM_BOTH);

  logic smart_cache;
  assign smart_cache = (policy == POL_GMM_CACHE) || (policy == POL_GMM_BOTH);

  logic miss_ready, do_cache;
  assign miss_ready = !ssd_busy && (score_got_q || !need_score_q);
  assign do_cache   = !smart_cache || (score_q >= threshold);

  always_comb begin
    trc_ready      = (state == S_IDLE) && ts_init_done;
    scr_ready      = (state == S_MISS_WAIT) && need_score_q && !score_got_q;
    rsp_valid      = (state == S_CMP);
    rsp_data.hit   = buf_hit;
    ts_rd_en       = trc_valid && trc_ready;
    ts_wr_en       = (state == S_WB);
    buf_load_en    = (state == S_LOAD);
    buf_touch_en   = (state == S_CMP) && rsp_ready && buf_hit;
    buf_fill_en    = (state == S_FILL);
    buf_upd_way    = (state == S_FILL) ? victim_q : buf_hit_way;
    buf_upd_wr     = req_q.wr;
    buf_fill_score = score_q;
    ssd_start      = 1'b0;
    ssd_is_write   = 1'b0;
    if (state == S_CMP && rsp_ready && !buf_hit) begin
      ssd_start = 1'b1;                  // page read, overlapped with the GMM
    end else if (state == S_MISS_WAIT && miss_ready) begin
      if (do_cache ? buf_victim_dirty : req_q.wr) begin
        ssd_start    = 1'b1;             // dirty write-back or bypassed write
        ssd_is_write = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      req_q        <= '0;
      need_score_q <= 1'b0;
      score_got_q  <= 1'b0;
      fill_after_q <= 1'b0;
      score_q      <= '0;
      victim_q     <= '0;
      n_req <= '0; n_hit <= '0; n_miss <= '0; n_bypass <= '0;
      n_evict <= '0; n_dirty_wb <= '0; busy_cycles <= '0;
    end else begin
      if (state != S_IDLE) busy_cycles <= busy_cycles + 1'b1;
      case (state)
        S_IDLE: if (trc_valid && trc_ready) begin
          req_q <= trc_data;
          n_req <= n_req + 1'b1;
          state <= S_LOAD;
        end
        S_LOAD: state <= S_CMP;
        S_CMP: if (rsp_ready) begin
          if (buf_hit) begin
            n_hit <= n_hit + 1'b1;
            state <= S_WB;
          end else begin
            n_miss       <= n_miss + 1'b1;
            need_score_q <= (policy != POL_LRU);
            score_got_q  <= 1'b0;
            score_q      <= '0;
            state        <= S_MISS_WAIT;
          end
        end
        S_MISS_WAIT: begin
          if (scr_valid && scr_ready) begin
            score_q     <= scr_data;
            score_got_q <= 1'b1;
          end
          if (miss_ready) begin
            victim_q     <= buf_victim_way;
            fill_after_q <= do_cache;
            if (!do_cache) n_bypass <= n_bypass + 1'b1;
            if (do_cache && buf_victim_valid) n_evict <= n_evict + 1'b1;
            if (do_cache && buf_victim_dirty) n_dirty_wb <= n_dirty_wb + 1'b1;
            if (do_cache ? buf_victim_dirty : req_q.wr) state <= S_SSD_WR;
            else if (do_cache)                          state <= S_FILL;
            else                                        state <= S_IDLE;
          end
        end
        S_SSD_WR: if (!ssd_busy) state <= fill_after_q ? S_FILL : S_IDLE;
        S_FILL:   state <= S_WB;
        S_WB:     state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_data));
endmodule
