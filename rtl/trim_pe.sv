// trim_pe: one processing element of the TrIM array.
//
// The PE keeps its weight stationary and performs one multiply-accumulate
// per cycle: psum_out <= psum_in + W * x, where x is the input selected for
// this cycle. It has the four registers of the TrIM PE:
//   w_q     weight; loaded from w_in (the PE above, or the external weight
//           port for the top row) when w_load is high, and passed down on
//           w_out, so the array loads its kernel top to bottom in K cycles;
//   iext_q  registered external input, captured when iext_en is high;
//   il_q    the input used this cycle, offered to the left neighbour (I_L),
//           to the left SRB and to the diagonal links of the row above;
//   psum_q  the partial sum, passed down to the PE below.
// Input selection follows the two multiplexers of the PE drawing: the first
// chooses between iext_q and the diagonal input i_d, the second between
// that result and the right-hand input i_r. SEL_IDLE keeps il_q unchanged
// (the design's own addition for cycles Algorithm 1 marks Idle); the
// multiply-accumulate still runs and the controller ignores its result.
// Timing: an input fetched (iext_en) in cycle t-1 is multiplied in cycle t
// and its product appears on psum_out in cycle t+1.
module trim_pe
  import trim_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // weight chain
  input  logic    w_load,
  input  data_t   w_in,
  output data_t   w_out,
  // inputs
  input  logic    iext_en,
  input  data_t   i_ext,
  input  data_t   i_r,
  input  data_t   i_d,
  input  in_sel_e sel,
  output data_t   i_l,
  // partial sums
  input  psum_t   psum_in,
  output psum_t   psum_out
);

  data_t w_q, iext_q, il_q;
  psum_t psum_q;
  data_t mux_ed, x;
  logic signed [2*DATA_W-1:0] prod;   // full-precision product

  // First multiplexer: external or diagonal; second: that or right input.
  always_comb begin
    mux_ed = (sel == SEL_D) ? i_d : iext_q;
    x      = (sel == SEL_R) ? i_r : mux_ed;
    if (sel == SEL_IDLE) x = il_q;
    prod = w_q * x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q    <= '0;
      iext_q <= '0;
      il_q   <= '0;
      psum_q <= '0;
    end else begin
      if (w_load)  w_q    <= w_in;
      if (iext_en) iext_q <= i_ext;
      il_q   <= x;
      psum_q <= psum_in + psum_t'(prod);
    end
  end

  assign w_out    = w_q;
  assign i_l      = il_q;
  assign psum_out = psum_q;

endmodule
