// tag_score_buffer: on-chip, fully partitioned copy of one cache set.
//
// The cache control engine loads the set addressed by a request from the tag and
// score table into this buffer. Because every way sits in its own register, the
// target tag is compared against all WAYS tags in parallel (one cycle) instead of
// one by one, and a victim is chosen in the same cycle:
//   - an invalid way, if any (lowest index first);
//   - otherwise, with evict_gmm = 1, the way with the lowest GMM score (ties go to
//     the lowest index), which is the GMM eviction of the source design;
//   - otherwise the least recently used way (largest age).
// Updates (one per cycle, registered):
//   load     take a whole set from the table
//   touch    mark way `upd_way` most recently used; set its dirty bit if upd_wr
//   fill     replace way `upd_way` with a new block (tag, score, dirty = upd_wr),
//            most recently used
// The LRU ages form a permutation over the valid ways: a touched or filled way
// gets age 0 and every valid way younger than its old age (an invalid way counts
// as oldest) ages by one. The parallel compare and the lowest-score eviction follow
// the paper; keeping the LRU ages next to the scores, so that the policy can be
// switched at run time, is this design's choice.
module tag_score_buffer
  import icgmm_pkg::*;
(
  input  logic            clk,
  input  logic            load_en,
  input  set_t            load_data,
  input  logic [PI_W-1:0] lookup_tag,
  input  logic            evict_gmm,
  input  logic            touch_en,
  input  logic            fill_en,
  input  way_idx_t        upd_way,
  input  logic            upd_wr,
  input  score_t          fill_score,
  output set_t            set_q,
  output logic            hit,
  output way_idx_t        hit_way,
  output way_idx_t        victim_way,
  output logic            victim_valid,
  output logic            victim_dirty
);
  // parallel tag compare
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (set_q[w].valid && set_q[w].tag == lookup_tag) begin
        hit     = 1'b1;
        hit_way = way_idx_t'(w);
      end
    end
  end

  // victim selection
  logic     any_invalid;
  way_idx_t inv_way, min_way, lru_way;
  always_comb begin
    any_invalid = 1'b0;
    inv_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!set_q[w].valid) begin
        any_invalid = 1'b1;
        inv_way = way_idx_t'(w);
      end
    end
    min_way = '0;
    lru_way = '0;
    for (int w = 1; w < WAYS; w++) begin
      if (set_q[w].score < set_q[min_way].score) min_way = way_idx_t'(w);
      if (set_q[w].age   > set_q[lru_way].age)   lru_way = way_idx_t'(w);
    end
    victim_way   = any_invalid ? inv_way : (evict_gmm ? min_way : lru_way);
    victim_valid = set_q[victim_way].valid;
    victim_dirty = set_q[victim_way].valid && set_q[victim_way].dirty;
  end

  // registered updates
  logic [AGE_W-1:0] old_age;
  assign old_age = set_q[upd_way].valid ? set_q[upd_way].age : AGE_W'(WAYS - 1);

  always_ff @(posedge clk) begin
    if (load_en) begin
      set_q <= load_data;
    end else if (touch_en || fill_en) begin
      for (int w = 0; w < WAYS; w++) begin
        if (way_idx_t'(w) == upd_way) begin
          set_q[w].age <= '0;
          if (fill_en) begin
            set_q[w].valid <= 1'b1;
            set_q[w].dirty <= upd_wr;
            set_q[w].tag   <= lookup_tag;
            set_q[w].score <= fill_score;
          end else if (upd_wr) begin
            set_q[w].dirty <= 1'b1;
          end
        end else if (set_q[w].valid && set_q[w].age < old_age) begin
          set_q[w].age <= set_q[w].age + 1'b1;
        end
      end
    end
  end
endmodule
