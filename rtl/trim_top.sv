// trim_top: TrIM (Triangular Input Movement) systolic array for CNNs.
//
// A K x K array of weight-stationary PEs computes a 2-D convolution of an
// H_I x W_I ifmap with a K x K kernel (stride 1, no padding), producing
// the H_O x W_O = (H_I-K+1) x (W_I-K+1) ofmap in raster order, one output
// per cycle after a K-cycle fill. Inputs are read from main memory about
// once: each one moves right to left along a PE row, then into the row's
// Shift Register Buffer, then diagonally up into the row above, so it is
// reused by up to K*K multiplications. Only the last K-1 columns of an
// ifmap row are read a second time by each upper row (for W_I > 2K).
// In MODE_FC the same array computes K*K-element dot products, one per
// cycle, with every input injected vertically from memory.
//
// Kernels of another size K_E (1..K_E_MAX) are run as ceil(K_E/K)^2
// zero-padded K x K tile passes whose ofmaps are summed on chip.
//
// Blocks: trim_controller (weight loading, Algorithm 1 sequencing, tile
// loop), trim_array (PEs, SRBs, links), trim_adder_tree (column
// reduction) and trim_tile_acc (sum of the tile passes).
//
// Interface (main memory is outside; reads return data in the same cycle):
//   start/mode/ifmap_h/ifmap_w/fc_vectors/kernel_size
//                                          command, sampled on start
//   wt_rd_en/wt_rd_row/wt_rd_col -> wt_rd_data[K]
//                                          K weights kernel[row][col+j]
//                                          per cycle, K cycles per pass,
//                                          bottom tile row first; values
//                                          past the kernel edge are
//                                          ignored
//   in_rd_en/row/col[K][K] -> in_rd_data   one port per PE; conv: ifmap
//                                          [row][col]; fc: vector row,
//                                          element col
//   out_valid/out_data                     ofmap activations, raster order
//   busy/done                              done pulses when the last
//                                          output has been delivered
// Latency per pass: K cycles of weight load, then the last output is
// registered K + H_O*W_O cycles after the first multiply.
module trim_top
  import trim_pkg::*;
#(
  parameter int unsigned K       = K_DEF,
  parameter int unsigned W_I_MAX = W_I_MAX_DEF,
  parameter int unsigned H_I_MAX = H_I_MAX_DEF,
  parameter int unsigned K_E_MAX = K_E_MAX_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  mode_e mode,
  input  idx_t  ifmap_h,
  input  idx_t  ifmap_w,
  input  idx_t  fc_vectors,
  input  idx_t  kernel_size,
  output logic  busy,
  output logic  done,
  output logic  wt_rd_en,
  output idx_t  wt_rd_row,
  output idx_t  wt_rd_col,
  input  data_t wt_rd_data [K],
  output logic  in_rd_en   [K][K],
  output idx_t  in_rd_row  [K][K],
  output idx_t  in_rd_col  [K][K],
  input  data_t in_rd_data [K][K],
  output logic  out_valid,
  output psum_t out_data
);

  logic    w_load, srb_en, psum_valid;
  in_sel_e sel [K][K];
  psum_t   psum_bot [K];
  logic    wt_mask [K];
  data_t   w_top [K];
  logic [$clog2(W_I_MAX+1)-1:0] eff_w;
  logic    tile_start, tile_first, tile_last;
  logic    tree_valid;
  psum_t   tree_sum;

  // zero weights past the kernel edge (padding of the last tiles)
  always_comb
    for (int j = 0; j < int'(K); j++)
      w_top[j] = wt_mask[j] ? wt_rd_data[j] : data_t'(0);

  trim_controller #(.K(K), .W_I_MAX(W_I_MAX), .H_I_MAX(H_I_MAX),
                    .K_E_MAX(K_E_MAX)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .mode       (mode),
    .ifmap_h    (ifmap_h),
    .ifmap_w    (ifmap_w),
    .fc_vectors (fc_vectors),
    .kernel_size(kernel_size),
    .busy       (busy),
    .done       (done),
    .wt_rd_en   (wt_rd_en),
    .wt_rd_row  (wt_rd_row),
    .wt_rd_col  (wt_rd_col),
    .wt_mask    (wt_mask),
    .w_load     (w_load),
    .in_rd_en   (in_rd_en),
    .in_rd_row  (in_rd_row),
    .in_rd_col  (in_rd_col),
    .sel        (sel),
    .eff_w      (eff_w),
    .srb_en     (srb_en),
    .psum_valid (psum_valid),
    .tile_start (tile_start),
    .tile_first (tile_first),
    .tile_last  (tile_last)
  );

  trim_array #(.K(K), .W_I_MAX(W_I_MAX)) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .ifmap_w  (eff_w),
    .w_load   (w_load),
    .w_top    (w_top),
    .iext_en  (in_rd_en),
    .i_ext    (in_rd_data),
    .sel      (sel),
    .srb_en   (srb_en),
    .psum_bot (psum_bot)
  );

  trim_adder_tree #(.K(K)) u_tree (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (psum_valid),
    .psum      (psum_bot),
    .out_valid (tree_valid),
    .sum       (tree_sum)
  );

  trim_tile_acc #(.DEPTH((H_I_MAX - K) * (W_I_MAX - K))) u_acc (
    .clk        (clk),
    .rst_n      (rst_n),
    .tile_start (tile_start),
    .tile_first (tile_first),
    .tile_last  (tile_last),
    .in_valid   (tree_valid),
    .in_data    (tree_sum),
    .out_valid  (out_valid),
    .out_data   (out_data)
  );

endmodule
