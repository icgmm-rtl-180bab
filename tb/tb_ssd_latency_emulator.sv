// tb_ssd_latency_emulator: starts reads and writes on a short instance (10 / 25
// cycles) and on the default one (75 us / 900 us at 233 MHz = 17,475 / 209,700
// cycles), and checks that done comes exactly READ_CYC or WRITE_CYC cycles after
// the start, that busy covers that span, and the busy-cycle total.
`timescale 1ns/1ps
module tb_ssd_latency_emulator;
  import icgmm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic start_s, wr_s, busy_s, done_s, start_d, wr_d, busy_d, done_d;
  logic [47:0] bc_s, bc_d;
  ssd_latency_emulator #(.READ_CYC(10), .WRITE_CYC(25)) u_s (.clk, .rst_n,
    .start(start_s), .is_write(wr_s), .busy(busy_s), .done(done_s), .busy_cycles(bc_s));
  ssd_latency_emulator u_d (.clk, .rst_n,
    .start(start_d), .is_write(wr_d), .busy(busy_d), .done(done_d), .busy_cycles(bc_d));
  int checks = 0, failures = 0;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input bit dflt, input bit w, input int exp_cyc);
    int cyc = 0;
    @(negedge clk);
    if (dflt) begin start_d = 1; wr_d = w; end else begin start_s = 1; wr_s = w; end
    @(negedge clk);
    start_d = 0; start_s = 0;
    cyc = 1;
    while (!(dflt ? done_d : done_s)) begin
      checks++;
      if (!(dflt ? busy_d : busy_s)) begin failures++; $display("not busy at %0d", cyc); break; end
      @(negedge clk); cyc++;
    end
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("latency %0d expected %0d", cyc, exp_cyc); end
    @(negedge clk);
    checks++;
    if (dflt ? busy_d : busy_s) begin failures++; $display("still busy"); end
  endtask

  initial begin
    start_s = 0; start_d = 0; wr_s = 0; wr_d = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(0, 0, 10); run(0, 1, 25); run(0, 0, 10);
    checks++; if (bc_s != 45) begin failures++; $display("busy cycles %0d", bc_s); end
    run(1, 0, SSD_READ_CYC); run(1, 1, SSD_WRITE_CYC);
    checks++; if (bc_d != 48'(SSD_READ_CYC + SSD_WRITE_CYC)) begin failures++; $display("busy cycles %0d", bc_d); end
    checks++; if (SSD_READ_CYC != 17475 || SSD_WRITE_CYC != 209700) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
