// timestamp_transform: the trace timestamp transformation of the ICGMM policy
// (Algorithm 1 of the source design), done in hardware on every request.
//
// Requests are grouped into time windows of LEN_WINDOW consecutive requests; all
// requests of a window get the same timestamp, the window index. The index counts
// up and wraps to 0 after LEN_SHOT windows (one "access shot"). So request number i
// (from reset) gets ts = floor(i / LEN_WINDOW) mod LEN_SHOT.
//
// Interface: ts_out is the timestamp of the request presented now; it is valid
// combinationally and the counters advance on a cycle with req_fire high.
// The window/shot lengths (32, 10,000) follow the paper. Applying the transform in
// hardware to the live request stream, rather than offline, is this design's
// choice: the GMM must see the same time input it was trained with.
module timestamp_transform
  import icgmm_pkg::*;
#(
  parameter int unsigned LEN_WINDOW_P = LEN_WINDOW,
  parameter int unsigned LEN_SHOT_P   = LEN_SHOT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_fire,
  output logic [TS_W-1:0] ts_out
);
  localparam int unsigned IW = $clog2(LEN_WINDOW_P + 1);

  logic [IW-1:0]   index_q, index_n;
  logic [TS_W-1:0] ts_q, ts_n;

  // Algorithm 1, lines 4-9, for the request now presented.
  always_comb begin
    ts_n    = ts_q;
    index_n = index_q;
    if (index_n >= IW'(LEN_WINDOW_P)) begin
      ts_n    = ts_n + 1'b1;
      index_n = '0;
    end
    if (ts_n >= TS_W'(LEN_SHOT_P)) ts_n = '0;
    index_n = index_n + 1'b1;
  end

  // The request's timestamp is the value after the two checks (before the
  // increment of index, which does not change ts).
  assign ts_out = ts_n;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ts_q    <= '0;
      index_q <= '0;
    end else if (req_fire) begin
      ts_q    <= ts_n;
      index_q <= index_n;
    end
  end
endmodule
