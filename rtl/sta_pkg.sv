// sta_pkg: constants shared by the Systolic Tensor Array for DBB (STA-DBB).
//
// Operands are signed INT8 and accumulators INT32, as in the INT8 mobile
// inference setting the design targets. The default array shape is the
// 4x8x4 tensor PE of the best STA-DBB configuration, with each weight
// column compressed in the density-bound-block (DBB) format: blocks of
// 8 weights along the reduction dimension with at most 4 non-zeros
// (50% DBB sparsity). The 2x2 grid of tensor PEs is taken from the
// array drawings; the evaluation does not state a grid size.
//
// A compressed DBB block is one bitmask byte (bit i set = element i is
// non-zero) followed by the non-zero bytes in ascending element order.
// On the weight input port a block occupies DBB_BLK*8 bits so that the
// same port can carry an uncompressed 8-byte block in dense mode:
//   sparse: bits [7:0] bitmask, bits [8+8j +: 8] j-th non-zero value
//   dense : bits [8i +: 8] element i
package sta_pkg;

  localparam int unsigned OP_W  = 8;   // INT8 operands
  localparam int unsigned ACC_W = 32;  // INT32 accumulators

  // Default STA-DBB shape A x B x C _ M x N
  localparam int unsigned DEF_A   = 4;
  localparam int unsigned DEF_B   = 8;   // DBB block size = dot-product length
  localparam int unsigned DEF_C   = 4;
  localparam int unsigned DEF_NNZ = 4;   // non-zero bound per block (50%)
  localparam int unsigned DEF_M   = 2;
  localparam int unsigned DEF_N   = 2;

  typedef logic signed [OP_W-1:0]  op_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Operating mode of the whole engine
  typedef enum logic {
    MODE_SPARSE = 1'b0,  // DBB-compressed weights, full throughput
    MODE_DENSE  = 1'b1   // uncompressed weights, half throughput
  } mode_e;

endpackage
