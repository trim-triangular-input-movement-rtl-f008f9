// trim_tile_acc: sums the partial ofmaps of a tiled large-kernel run.
//
// A K_E x K_E kernel larger than the K x K array is split into
// ceil(K_E/K)^2 zero-padded K x K tiles; the array convolves the ifmap with
// each tile in turn, and the ofmaps of the tile passes are added. This
// block does that addition. During a pass, outputs arrive in raster order,
// one per in_valid, and are matched with buffer entry 0, 1, 2, ... (the
// index restarts on tile_start):
//   first pass (tile_first)           buf[n] <= in_data
//   middle passes                     buf[n] <= buf[n] + in_data
//   last pass (tile_last)             out_data = buf[n] + in_data, out_valid
// A run with a single pass (tile_first and tile_last, the normal K x K
// case) passes the adder-tree output straight through without touching
// the buffer, so it adds no latency. The output is combinational from
// in_data and the buffer read.
// The tiling itself is suggested in the TrIM discussion of
// reconfigurability, which says the tile convolutions are "later summed";
// where and how they are summed is this design's choice: a buffer of
// DEPTH 32-bit words with combinational read, one read-modify-write per
// cycle. DEPTH covers the largest ofmap of a tiled run,
// (H_I_MAX-K) x (W_I_MAX-K).
module trim_tile_acc
  import trim_pkg::*;
#(
  parameter int unsigned DEPTH = (H_I_MAX_DEF - K_DEF) * (W_I_MAX_DEF - K_DEF)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  tile_start,   // pulse before the first output of a pass
  input  logic  tile_first,   // current pass is the first tile
  input  logic  tile_last,    // current pass is the last tile
  input  logic  in_valid,
  input  psum_t in_data,
  output logic  out_valid,
  output psum_t out_data
);

  localparam int unsigned AW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  psum_t          buf_q [DEPTH];
  logic [AW-1:0]  idx;
  psum_t          prev;
  logic           single;

  assign single   = tile_first && tile_last;
  assign prev     = tile_first ? psum_t'(0) : buf_q[idx];
  assign out_valid = in_valid && tile_last;
  assign out_data  = prev + in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
    end else if (tile_start) begin
      idx <= '0;
    end else if (in_valid && !single) begin
      idx <= idx + AW'(1);
    end
  end

  // Buffer: no reset (its contents are always written before being read).
  always_ff @(posedge clk) begin
    if (in_valid && !single && !tile_last) buf_q[idx] <= prev + in_data;
  end

  // The buffer must be large enough for every tiled pass.
  a_depth: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !single) |-> (int'(idx) < int'(DEPTH)));

endmodule
