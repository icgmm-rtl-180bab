// gmm_weight_buffer: on-chip store of the GMM parameters of the policy engine.
//
// One entry per Gaussian (NUM_G entries of icgmm_pkg::gauss_t). The GMM is small
// enough to stay on chip, so the parameters are written once through the load
// port (from the trace/parameter memory, before the kernel starts) and afterwards
// only read, one Gaussian per cycle. Read latency is one cycle: rd_data holds the
// entry addressed by rd_addr in the previous cycle with rd_en high.
// The store itself follows the paper; the port widths and the one-cycle read are
// this design's choice.
module gmm_weight_buffer
  import icgmm_pkg::*;
#(
  parameter int unsigned NUM_G = NUM_GAUSS
) (
  input  logic                     clk,
  // one-time load port
  input  logic                     ld_en,
  input  logic [$clog2(NUM_G)-1:0] ld_addr,
  input  gauss_t                   ld_data,
  // read port of the GMM PE
  input  logic                     rd_en,
  input  logic [$clog2(NUM_G)-1:0] rd_addr,
  output gauss_t                   rd_data
);
  gauss_t mem [NUM_G];

  always_ff @(posedge clk) begin
    if (ld_en) mem[ld_addr] <= ld_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
