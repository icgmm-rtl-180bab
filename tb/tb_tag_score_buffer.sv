// tb_tag_score_buffer: loads random sets and checks the parallel tag compare and
// the victim choice (invalid way first, then lowest score or largest age) against
// a direct search; then applies random touch and fill updates and checks the
// resulting ways (dirty, tag, score, LRU ages) against a model.
`timescale 1ns/1ps
module tb_tag_score_buffer;
  import icgmm_pkg::*;
  logic clk = 0;
  always #2 clk = ~clk;
  logic load_en, evict_gmm, touch_en, fill_en, upd_wr, hit, victim_valid, victim_dirty;
  set_t load_data, set_q;
  logic [PI_W-1:0] lookup_tag;
  way_idx_t upd_way, hit_way, victim_way;
  score_t fill_score;
  tag_score_buffer dut (.*);
  set_t m;
  int checks = 0, failures = 0;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic void check_outputs();
    int eh = -1, ev = -1;
    for (int w = 0; w < WAYS; w++) if (m[w].valid && m[w].tag == lookup_tag && eh < 0) eh = w;
    for (int w = 0; w < WAYS; w++) if (!m[w].valid && ev < 0) ev = w;
    if (ev < 0) begin
      ev = 0;
      for (int w = 1; w < WAYS; w++)
        if (evict_gmm ? (m[w].score < m[ev].score) : (m[w].age > m[ev].age)) ev = w;
    end
    checks++;
    if (hit != (eh >= 0) || (eh >= 0 && hit_way != way_idx_t'(eh))) begin
      failures++; $display("hit %0d/%0d expected %0d", hit, hit_way, eh);
    end
    checks++;
    if (victim_way != way_idx_t'(ev) || victim_dirty != (m[ev].valid && m[ev].dirty)
        || victim_valid != m[ev].valid) begin
      failures++; $display("victim %0d expected %0d", victim_way, ev);
    end
  endfunction

  initial begin
    load_en = 0; touch_en = 0; fill_en = 0; evict_gmm = 0; upd_way = 0; upd_wr = 0;
    fill_score = 0; lookup_tag = 0; load_data = '0;
    for (int n = 0; n < 300; n++) begin
      // a random set: tags from a small range so that hits occur; distinct ages
      int perm[WAYS];
      foreach (perm[i]) perm[i] = i;
      perm.shuffle();
      for (int w = 0; w < WAYS; w++) begin
        load_data[w].valid = ($urandom_range(5) != 0);
        load_data[w].dirty = 1'($urandom);
        load_data[w].tag   = PI_W'($urandom_range(12));
        load_data[w].score = score_t'($urandom_range(20));
        load_data[w].age   = AGE_W'(perm[w]);
      end
      if (n % 2 == 0) for (int w = 0; w < WAYS; w++) load_data[w].valid = 1;
      @(negedge clk); load_en = 1; m = load_data;
      @(negedge clk); load_en = 0;
      repeat (4) begin
        lookup_tag = PI_W'($urandom_range(14));
        evict_gmm  = 1'($urandom);
        #1 check_outputs();
        // one update
        upd_wr = 1'($urandom);
        if (hit) begin
          touch_en = 1; upd_way = hit_way;
        end else begin
          fill_en = 1; upd_way = victim_way; fill_score = score_t'($urandom_range(20));
        end
        begin
          automatic int w0 = int'(upd_way);
          automatic int old = m[w0].valid ? int'(m[w0].age) : WAYS - 1;
          for (int w = 0; w < WAYS; w++)
            if (w != w0 && m[w].valid && int'(m[w].age) < old) m[w].age++;
          m[w0].age = 0;
          if (fill_en) begin
            m[w0].valid = 1; m[w0].dirty = upd_wr; m[w0].tag = lookup_tag; m[w0].score = fill_score;
          end else if (upd_wr) m[w0].dirty = 1;
        end
        @(negedge clk); touch_en = 0; fill_en = 0;
        checks++;
        if (set_q != m) begin
          failures++; $display("set after update differs (n=%0d)", n);
          if (failures < 3) for (int w = 0; w < WAYS; w++) $display("  w%0d dut %p model %p", w, set_q[w], m[w]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
