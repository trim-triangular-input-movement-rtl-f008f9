// trim_srb: Shift Register Buffer (SRB) of the TrIM array.
//
// One SRB sits at the left edge of each array row i = 1..K-1. Every cycle
// it shifts in the input the row's leftmost PE used in the previous cycle
// (that PE's I_L) and moves every stored value one place further. The
// values that reach the tail are the ifmap elements the row above needs
// again when it starts its next output row, so they travel diagonally up
// instead of being fetched from main memory a second time.
// The TrIM dataflow gives the buffer a depth of W_I - K - 1 for an ifmap of
// width W_I. This RTL builds it with DEPTH = W_I_MAX - K - 1 registers and
// exposes every stage on q[], so the array can tap the stages that match
// the ifmap width in use (q[0] is the newest value, q[DEPTH-1] the oldest).
// Shifting is gated by en; reset clears the buffer.
module trim_srb
  import trim_pkg::*;
#(
  parameter int unsigned DEPTH = W_I_MAX_DEF - K_DEF - 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  data_t d,
  output data_t q [DEPTH]
);

  data_t sr [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(DEPTH); k++) sr[k] <= '0;
    end else if (en) begin
      sr[0] <= d;
      for (int k = 1; k < int'(DEPTH); k++) sr[k] <= sr[k-1];
    end
  end

  assign q = sr;

endmodule
