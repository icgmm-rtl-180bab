// tb_gmm_weight_buffer: loads all 256 Gaussians of the default buffer with random
// contents, then reads them back in random order, checking the one-cycle read
// latency and that a read without rd_en keeps the last output.
`timescale 1ns/1ps
module tb_gmm_weight_buffer;
  import icgmm_pkg::*;
  logic clk = 0;
  always #2 clk = ~clk;
  logic ld_en, rd_en;
  logic [7:0] ld_addr, rd_addr;
  gauss_t ld_data, rd_data;
  gmm_weight_buffer dut (.*);
  gauss_t ref_m [NUM_GAUSS];
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ld_en = 0; rd_en = 0; ld_addr = 0; rd_addr = 0; ld_data = '0;
    for (int k = 0; k < NUM_GAUSS; k++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = 8'(k);
      ld_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      ref_m[k] = ld_data;
    end
    @(negedge clk); ld_en = 0;
    for (int n = 0; n < 600; n++) begin
      automatic logic [7:0] a = 8'($urandom);
      @(negedge clk); rd_en = 1; rd_addr = a;
      @(negedge clk); rd_en = 0; rd_addr = 8'($urandom);
      checks++;
      if (rd_data != ref_m[a]) begin failures++; $display("addr %0d mismatch", a); end
      @(negedge clk);
      checks++;
      if (rd_data != ref_m[a]) begin failures++; $display("output not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
