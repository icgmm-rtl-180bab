// tb_tag_store: the default 2048-set table. After reset init_done must rise after
// exactly 2048 cycles with every set cleared; then random writes and reads are
// checked against a model, including the one-cycle read latency.
`timescale 1ns/1ps
module tb_tag_store;
  import icgmm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic init_done, rd_en, wr_en;
  logic [10:0] rd_set, wr_set;
  set_t rd_data, wr_data;
  tag_store dut (.*);
  set_t model [SETS];
  int checks = 0, failures = 0;
  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cyc = 0;
    rd_en = 0; wr_en = 0; rd_set = 0; wr_set = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    while (!init_done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != SETS) begin failures++; $display("init took %0d", cyc); end
    foreach (model[s]) model[s] = '0;
    for (int n = 0; n < 3000; n++) begin
      automatic logic [10:0] s = 11'($urandom_range(n < 1500 ? 40 : SETS - 1));
      @(negedge clk);
      if ($urandom_range(1)) begin
        wr_en = 1; wr_set = s;
        for (int w = 0; w < WAYS; w++) wr_data[w] = {$urandom, $urandom, $urandom};
        model[s] = wr_data;
      end else begin
        rd_en = 1; rd_set = s;
        @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data != model[s]) begin failures++; $display("set %0d mismatch", s); end
      end
      @(negedge clk); wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
