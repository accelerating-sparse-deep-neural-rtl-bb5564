// Shared constants and types of the 2:4 sparse Tensor Core.
//
// A 2:4 structured-sparse matrix keeps at most two nonzero values in every
// group of four consecutive values along K. In compressed form only two
// values per group are stored, each with a 2-bit index giving its position
// 0..3 inside the group. These constants fix that format; the operand width
// defaults (8-bit inputs, 32-bit accumulator) are the integer row of the
// format table of the original design.
package sparse_pkg;

  // Positions in one group of the 2:4 pattern, and stored values per group.
  localparam int unsigned GROUP      = 4;
  localparam int unsigned KEEP       = 2;
  // Width of one metadata index (position 0..GROUP-1 inside a group).
  localparam int unsigned META_W     = 2;

  // Default operand widths: signed 8-bit inputs, 32-bit accumulator.
  localparam int unsigned DATA_W     = 8;
  localparam int unsigned ACC_W      = 32;

  // Operating mode of one beat of the Tensor Core.
  typedef enum logic {
    MODE_DENSE  = 1'b0,   // A is dense: KH A values meet the first KH B values
    MODE_SPARSE = 1'b1    // A is 2:4 compressed: KH values cover 2*KH of K
  } mode_e;

  // Input format of one beat. The A row and the B slice are the same bit
  // fields in every format; only how the bits are split into values changes:
  // a row of KH 8-bit slots holds KH INT8, KH/2 FP16 or BF16, or KH/4 TF32
  // values (TF32 carried in 32-bit words). The accumulator is INT32 for INT8,
  // FP16 (in the low 16 bits) for FMT_FP16_ACC16 and FP32 for the others.
  typedef enum logic [2:0] {
    FMT_INT8       = 3'd0,
    FMT_FP16       = 3'd1,   // FP16 inputs, FP32 accumulator
    FMT_BF16       = 3'd2,
    FMT_TF32       = 3'd3,   // sparse mode uses the 1:2 pattern
    FMT_FP16_ACC16 = 3'd4    // FP16 inputs, FP16 accumulator
  } fmt_e;

endpackage
