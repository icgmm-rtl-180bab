// tb_timestamp_transform: Algorithm 1 of the ICGMM trace processing. Request i
// must get timestamp floor(i / len_window) mod len_access_shot. Checked on a small
// instance (window 4, shot 3) with random gaps between requests, and on the
// default instance (window 32, shot 10,000) over more than one full access shot.
`timescale 1ns/1ps
module tb_timestamp_transform;
  import icgmm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic fire_s, fire_d;
  logic [TS_W-1:0] ts_s, ts_d;
  timestamp_transform #(.LEN_WINDOW_P(4), .LEN_SHOT_P(3)) u_small (
    .clk, .rst_n, .req_fire(fire_s), .ts_out(ts_s));
  timestamp_transform u_def (.clk, .rst_n, .req_fire(fire_d), .ts_out(ts_d));

  int checks = 0, failures = 0;
  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int i = 0;
    fire_s = 0; fire_d = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (i < 100) begin
      @(negedge clk);
      fire_s = $urandom_range(1);
      if (fire_s) begin
        checks++;
        if (ts_s != TS_W'((i / 4) % 3)) begin failures++; $display("small i=%0d ts=%0d", i, ts_s); end
        i++;
      end
    end
    @(negedge clk); fire_s = 0;
    for (int k = 0; k < LEN_WINDOW * LEN_SHOT + 200; k++) begin
      @(negedge clk); fire_d = 1;
      if (k % 97 == 0 || k >= LEN_WINDOW * LEN_SHOT - 40) begin
        checks++;
        if (ts_d != TS_W'((k / LEN_WINDOW) % LEN_SHOT)) begin
          failures++; $display("default k=%0d ts=%0d", k, ts_d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
