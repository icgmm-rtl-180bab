// tag_store: the cache tag and GMM score table of the DRAM cache.
//
// In the prototype the table lives in the DRAM cache memory (an HBM bank) next to
// the cached pages, organised by set; the cache control engine moves one whole set
// (all ways) at a time into its on-chip buffer and back. This module is that table:
// NUM_SETS words of icgmm_pkg::set_t, one read port and one write port.
// Timing: rd_data is valid one cycle after rd_en. After reset the
// module clears every set (valid = 0), one set per cycle; init_done rises when all
// NUM_SETS sets are clear, and the engine must not access the table before that.
// Only tags and scores are modelled, not page data: the source design moves no
// page data either. The memory technology (HBM) is outside this model.
module tag_store
  import icgmm_pkg::*;
#(
  parameter int unsigned NUM_SETS = SETS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  output logic                        init_done,
  input  logic                        rd_en,
  input  logic [$clog2(NUM_SETS)-1:0] rd_set,
  output set_t                        rd_data,
  input  logic                        wr_en,
  input  logic [$clog2(NUM_SETS)-1:0] wr_set,
  input  set_t                        wr_data
);
  localparam int unsigned SW = $clog2(NUM_SETS);

  set_t mem [NUM_SETS];
  logic [SW:0] init_ptr;

  assign init_done = init_ptr[SW];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_ptr <= '0;
    end else if (!init_done) begin
      init_ptr <= (init_ptr == (SW+1)'(NUM_SETS - 1)) ? (SW+1)'(1) << SW : init_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!init_done && rst_n) mem[init_ptr[SW-1:0]] <= '0;
    else if (wr_en)          mem[wr_set] <= wr_data;
    if (rd_en) rd_data <= mem[rd_set];
  end

  a_no_access_before_init: assert property (@(posedge clk) disable iff (!rst_n)
    !init_done |-> !(rd_en || wr_en));
endmodule
