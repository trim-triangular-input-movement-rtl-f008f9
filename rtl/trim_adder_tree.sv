// trim_adder_tree: final reduction of the TrIM array.
//
// Adds the K partial sums leaving the bottom PE row and registers the
// result, so each output activation appears one cycle after the bottom row
// produced its psums. The sum is formed as a balanced binary tree of K-1
// two-input adders (two adders for K = 3) followed by the single output
// register of the TrIM register count; the tree shape is this design's
// choice, only the function and the one register come from the dataflow
// description. A valid bit travels alongside the sum.
module trim_adder_tree
  import trim_pkg::*;
#(
  parameter int unsigned K = K_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  psum_t psum [K],
  output logic  out_valid,
  output psum_t sum
);

  // Balanced tree: level l has n_l nodes; the last level has one node.
  localparam int unsigned LEVELS = (K <= 1) ? 1 : $clog2(K) + 1;

  psum_t node [LEVELS][K];
  psum_t sum_q;
  logic  valid_q;

  always_comb begin
    for (int l = 0; l < int'(LEVELS); l++)
      for (int n = 0; n < int'(K); n++) node[l][n] = '0;
    for (int n = 0; n < int'(K); n++) node[0][n] = psum[n];
    for (int l = 1; l < int'(LEVELS); l++) begin
      for (int n = 0; n < int'(K); n++) begin
        if (2*n + 1 < int'(K)) node[l][n] = node[l-1][2*n] + node[l-1][2*n+1];
        else if (2*n < int'(K)) node[l][n] = node[l-1][2*n];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q   <= '0;
      valid_q <= 1'b0;
    end else begin
      sum_q   <= node[LEVELS-1][0];
      valid_q <= in_valid;
    end
  end

  assign sum       = sum_q;
  assign out_valid = valid_q;

endmodule
