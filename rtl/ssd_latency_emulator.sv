// ssd_latency_emulator: stands in for the SSD behind the DRAM cache.
//
// On a cache miss the cache control engine starts the emulator and pauses until it
// finishes, so that measured access times include the SSD's response time. A start
// with is_write = 0 emulates a page read, with is_write = 1 a page write; the
// emulator then stays busy for READ_CYC or WRITE_CYC cycles and pulses done in the
// last of them. Starting while busy is not allowed. busy_cycles counts all cycles
// spent busy, the total SSD time of a run.
// Timing: start in cycle n -> done in cycle n + READ_CYC (or n + WRITE_CYC).
// The defaults are the paper's TLC SSD, 75 us read and 900 us write, at the
// 233 MHz clock: 17,475 and 209,700 cycles. The counter itself is this design's.
module ssd_latency_emulator
  import icgmm_pkg::*;
#(
  parameter int unsigned READ_CYC  = SSD_READ_CYC,
  parameter int unsigned WRITE_CYC = SSD_WRITE_CYC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        is_write,
  output logic        busy,
  output logic        done,
  output logic [47:0] busy_cycles
);
  logic [LAT_W-1:0] remain;

  assign busy = (remain != '0);
  assign done = (remain == LAT_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remain      <= '0;
      busy_cycles <= '0;
    end else begin
      if (start)     remain <= is_write ? LAT_W'(WRITE_CYC) : LAT_W'(READ_CYC);
      else if (busy) remain <= remain - 1'b1;
      if (busy) busy_cycles <= busy_cycles + 1'b1;
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  initial assert (READ_CYC > 0 && WRITE_CYC > 0 && WRITE_CYC < (1 << LAT_W));
endmodule
