// tb_sync_fifo: random pushes and pops against a queue model. Checks the popped
// data and order, the occupancy count, and that in_ready drops only when full
// and not being read.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int unsigned D = 4;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  sync_fifo #(.T(logic [7:0]), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] q[$];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(99) < (n < 1000 ? 70 : 30));
      out_ready = ($urandom_range(99) < (n < 1000 ? 30 : 70));
      in_data   = 8'($urandom);
      #1;
      checks++;
      if (count != $bits(count)'(q.size()) || out_valid != (q.size() > 0)) begin
        failures++; $display("count %0d model %0d", count, q.size());
      end
      checks++;
      if (in_ready != (q.size() < D || out_ready)) begin failures++; $display("in_ready wrong"); end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("data %h exp %h", out_data, q[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
