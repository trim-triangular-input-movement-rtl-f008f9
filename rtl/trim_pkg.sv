// trim_pkg: types and constants shared by the TrIM systolic-array modules.
//
// The kernel size K = 3 and the largest ifmap size of 256 x 256 are the
// values the TrIM dataflow is evaluated with (K in {3,5,7}, I up to 256;
// the worked example and the FPGA slices use K = 3). The arithmetic widths
// are this design's own choice: 8-bit signed activations and weights and
// 32-bit signed partial sums, which hold K*K products of 16 bits for any
// K up to 181 without overflow.
package trim_pkg;

  // Kernel size of the array (K x K PEs).
  parameter int unsigned K_DEF     = 3;
  // Largest ifmap width / height the SRBs and counters are sized for.
  parameter int unsigned W_I_MAX_DEF = 256;
  parameter int unsigned H_I_MAX_DEF = 256;
  // Largest kernel run by tiling (K_E x K_E, split into K x K tiles). Not
  // given by the TrIM evaluation; 11 covers the 11 x 11 first layer of
  // AlexNet, the largest kernel of the CNNs it names.
  parameter int unsigned K_E_MAX_DEF = 11;

  parameter int unsigned DATA_W    = 8;
  parameter int unsigned PSUM_W    = 32;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [PSUM_W-1:0] psum_t;

  // Counters and main-memory coordinates (row, column / vector, element).
  parameter int unsigned IDX_W     = 16;
  typedef logic [IDX_W-1:0] idx_t;

  // Input source of a PE for one cycle (Fig. 4(b) multiplexers, plus idle).
  typedef enum logic [1:0] {
    SEL_EXT  = 2'd0,  // registered value fetched from main memory (I_ext)
    SEL_R    = 2'd1,  // value held by the right-hand neighbour (I_R)
    SEL_D    = 2'd2,  // diagonal value from the row below or its SRB (I_D)
    SEL_IDLE = 2'd3   // no new input: the PE's input register holds
  } in_sel_e;

  // Operating mode: convolutional layer (triangular movement) or
  // fully-connected layer (vertical injection only, WS-like).
  typedef enum logic {
    MODE_CONV = 1'b0,
    MODE_FC   = 1'b1
  } mode_e;

endpackage
