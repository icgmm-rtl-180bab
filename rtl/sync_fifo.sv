// sync_fifo: single-clock first-in first-out queue with valid/ready handshakes and a
// synchronous active-low reset.
//
// ICGMM joins its modules with FIFOs (trace, score and response FIFOs), so each
// module runs as soon as data is there and stalls when its output FIFO is full.
// Storage is a DEPTH-entry circular buffer; a word pushed in cycle n can be popped
// in cycle n+1. Push and pop may happen in the same cycle, also when full (the pop
// frees the slot). in_ready is low while full; out_valid is high while not empty.
// The FIFO depths are not given by the source design; 4 is this design's default.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count != DEPTH[$bits(count)-1:0]) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A word offered while the FIFO is full and not being read must be held.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    32'(count) <= DEPTH);
endmodule
