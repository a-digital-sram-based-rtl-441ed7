// cim_pkg: sizes and shared types of the attention-score CIM macro.
//
// The macro computes one attention score s_ij = X_i * W_QK * X_j^T, where
// W_QK = W_Q * W_K^T is precomputed offline and held stationary in the SRAM
// arrays. The default sizes are the published ones: a 64 x 64 matrix of INT8
// weights (64 arrays of 64 rows x 8 bits) and INT8 tokens. The widths of the
// adder tree and of the score are this design's own choice: they are wide
// enough that no intermediate sum can overflow.
package cim_pkg;
  localparam int unsigned ROWS   = 64;  // rows per array = index i' of W_QK
  localparam int unsigned ARRAYS = 64;  // number of arrays = index j' of W_QK
  localparam int unsigned WBITS  = 8;   // INT8 weights
  localparam int unsigned K      = 8;   // INT8 token elements
  localparam int unsigned PSUM_W = 14;  // per-array accumulator width
  localparam int unsigned TREE_W = PSUM_W + $clog2(ARRAYS);          // 20
  localparam int unsigned S_W    = 2*K + WBITS + $clog2(ROWS) + $clog2(ARRAYS); // 36

  // The four groups of the bit-serial decomposition, in processing order.
  // G4: both bits are magnitude bits (added), G1: both sign bits (added),
  // G2: sign bit of x_i with magnitude bits of x_j (subtracted),
  // G3: magnitude bits of x_i with the sign bit of x_j (subtracted).
  typedef enum logic [1:0] {GRP4 = 2'd0, GRP1 = 2'd1, GRP2 = 2'd2, GRP3 = 2'd3} group_e;

  // Row-issue request from the input buffer to the bank.
  typedef struct packed {
    logic                       valid;  // a compute cycle for one row
    logic [$clog2(ROWS)-1:0]    row;    // row i'
    logic                       x_bit;  // x_ii'(i*)
  } row_issue_t;

endpackage
