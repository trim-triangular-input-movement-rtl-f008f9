// trim_array: the K x K TrIM processing-element array with its SRBs.
//
// Wiring (PE(i,j): row i from the top, column j from the left):
//   weights  top row takes w_top[j]; every PE passes its weight to the PE
//            below, so K cycles of w_load fill the array top to bottom;
//   psums    PE(0,j) starts from 0, PE(i,j) adds to the psum of PE(i-1,j),
//            and the bottom row's psums leave on psum_bot[j];
//   right-to-left  I_R of PE(i,j) is I_L of PE(i,j+1) (the rightmost
//            column's I_R is unused and tied to 0);
//   SRBs     SRB(i-1) shifts in I_L of PE(i,0), for i = 1..K-1;
//   diagonal I_D of PE(i-1,j) comes from the row below through one chain
//            made of PE(i,K-1) .. PE(i,0) followed by SRB(i-1) stage 0 ..
//            DEPTH-1. With chain position e (e < K: PE(i,K-1-e); e >= K:
//            SRB stage e-K), PE(i-1,j) takes position e = W_I - 2 - j.
//            For W_I >= 2K+1 these are the last K stages of an SRB of
//            depth W_I-K-1, as in the TrIM description; for smaller ifmaps
//            some of them are the leftmost PEs of the row below, which is
//            the case the description notes for W_I <= 2K.
// The SRBs are built for the largest width W_I_MAX and the tap position is
// chosen at run time from ifmap_w (the ifmap width, or the window width
// W_O+K-1 of a tiled pass); this multiplexer is this design's own
// way of serving several ifmap widths with one array (the TrIM discussion
// proposes splitting the SRBs into groups with routing logic for that).
// Every PE's input source (sel) and external-input strobe (iext_en) come
// from the controller. Legal ifmap widths: K+1 .. W_I_MAX.
module trim_array
  import trim_pkg::*;
#(
  parameter int unsigned K       = K_DEF,
  parameter int unsigned W_I_MAX = W_I_MAX_DEF
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic [$clog2(W_I_MAX+1)-1:0] ifmap_w,
  input  logic    w_load,
  input  data_t   w_top   [K],
  input  logic    iext_en [K][K],
  input  data_t   i_ext   [K][K],
  input  in_sel_e sel     [K][K],
  input  logic    srb_en,
  output psum_t   psum_bot [K]
);

  localparam int unsigned DEPTH = W_I_MAX - K - 1;
  localparam int unsigned CHAIN = DEPTH + K;

  data_t w_out [K][K];
  data_t i_l   [K][K];
  data_t i_r   [K][K];
  data_t i_d   [K][K];
  psum_t psum  [K][K];
  data_t srb_q [K][DEPTH];   // row 0 entry unused

  // Diagonal chains of rows 1..K-1 (row 0 entry unused).
  data_t chain [K][CHAIN];

  for (genvar i = 0; i < K; i++) begin : g_row
    for (genvar j = 0; j < K; j++) begin : g_col
      data_t w_in_ij;
      psum_t psum_in_ij;
      if (i == 0) begin : g_top
        assign w_in_ij    = w_top[j];
        assign psum_in_ij = '0;
      end else begin : g_inner
        assign w_in_ij    = w_out[i-1][j];
        assign psum_in_ij = psum[i-1][j];
      end
      if (j == K-1) begin : g_right
        assign i_r[i][j] = '0;
      end else begin : g_link
        assign i_r[i][j] = i_l[i][j+1];
      end

      trim_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_load   (w_load),
        .w_in     (w_in_ij),
        .w_out    (w_out[i][j]),
        .iext_en  (iext_en[i][j]),
        .i_ext    (i_ext[i][j]),
        .i_r      (i_r[i][j]),
        .i_d      (i_d[i][j]),
        .sel      (sel[i][j]),
        .i_l      (i_l[i][j]),
        .psum_in  (psum_in_ij),
        .psum_out (psum[i][j])
      );
    end

    if (i == 0) begin : g_nosrb
      for (genvar k = 0; k < DEPTH; k++) begin : g_z
        assign srb_q[0][k] = '0;
      end
      for (genvar e = 0; e < CHAIN; e++) begin : g_zc
        assign chain[0][e] = '0;
      end
    end else begin : g_srb
      trim_srb #(.DEPTH(DEPTH)) u_srb (
        .clk   (clk),
        .rst_n (rst_n),
        .en    (srb_en),
        .d     (i_l[i][0]),
        .q     (srb_q[i])
      );
      for (genvar e = 0; e < CHAIN; e++) begin : g_chain
        if (e < K) begin : g_pe
          assign chain[i][e] = i_l[i][K-1-e];
        end else begin : g_sr
          assign chain[i][e] = srb_q[i][e-K];
        end
      end
    end
  end

  // Diagonal taps: PE(i-1,j) reads chain position W_I - 2 - j of row i.
  always_comb begin
    for (int j = 0; j < int'(K); j++) begin
      int e;
      e = int'(ifmap_w) - 2 - j;
      if (e < 0) e = 0;
      if (e > int'(CHAIN) - 1) e = int'(CHAIN) - 1;
      for (int i = 0; i < int'(K) - 1; i++) i_d[i][j] = chain[i+1][e];
      i_d[K-1][j] = '0;  // the bottom row has no diagonal source
    end
  end

  for (genvar j = 0; j < K; j++) begin : g_bot
    assign psum_bot[j] = psum[K-1][j];
  end

endmodule
