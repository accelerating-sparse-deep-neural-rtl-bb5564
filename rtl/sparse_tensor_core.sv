// sparse_tensor_core: a Tensor Core that multiplies a 2:4 sparse (or dense)
// matrix A by a dense matrix B and accumulates onto a dense matrix C.
//
// The core holds a TM x TN array of sparse_dot_unit lanes, one per element of
// the output tile D = A * B + C. An MMA is a run of beats, one per clock, from
// in_first to in_last. Each beat brings, for every tile row r, KH A values
// (a_val[r]) with their 2-bit positions (a_meta[r]), and for every tile column
// n a slice of 2*KH elements of B (b_tile[n]). Row r of A is broadcast to the
// TN lanes of row r, column n of B to the TM lanes of column n.
//
//   sparse beat: A row r is 2:4 compressed; the KH values stand for
//                K = 2*KH positions, and each lane picks the B elements the
//                nonzeros need (meta_select). TM*TN*KH multiply-adds cover
//                TM*TN*2*KH positions of the dense product.
//   dense beat:  A row r holds KH plain values that meet b_tile[n][0..KH-1].
//
// So for the same number of multipliers a sparse beat advances K twice as far
// as a dense one, and a GEMM with a 2:4 A takes half the beats. That doubling,
// the compressed format with 2-bit positions and the metadata selection of B
// follow the original design.
//
// Formats (in_fmt, one per MMA): INT8 with INT32 accumulation as above; FP16
// and BF16 (2:4, KH/2 values per A row) and TF32 (1:2 pattern, KH/4 values
// per A row) with FP32 accumulation; FP16 (2:4) with an FP16 accumulator held
// in the low 16 bits of each C/D word. The same A and B bits are
// reinterpreted, so per clock the core does 512 INT8, 256 FP16/BF16 or 128
// TF32 multiply-adds, and each doubles its K coverage in sparse mode. The
// tile shape (TM x TN lanes of KH 8-bit slots), the bit layout of the
// formats, the beat protocol and the pipeline are this implementation's
// choices. FP32 inputs are not supported.
//
// Ports: in_valid/in_first/in_last frame an MMA; in_mode (mode_e) and in_fmt
// (fmt_e) describe each beat; a_val/a_meta carry A rows, b_tile B columns,
// c_tile the C tile; out_valid/d_tile return D.
//
// Timing: beats are accepted every cycle (no back-pressure). C is read with
// the in_first beat. out_valid is high for one cycle, two cycles after the
// in_last beat was presented, with d_tile = A*B + C; d_tile keeps that value
// until the next MMA's first beat reaches the accumulators, so MMAs can follow
// back to back. A one-beat MMA has in_first and in_last both high.
// Reset is synchronous, active low.
module sparse_tensor_core
  import sparse_pkg::*;
#(
  parameter int unsigned TM = 8,        // output tile rows
  parameter int unsigned TN = 4,        // output tile columns
  parameter int unsigned KH = 16,       // multipliers per lane (K/2 of a sparse beat)
  parameter int unsigned DW = DATA_W,   // operand width
  parameter int unsigned AW = ACC_W     // accumulator width
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  in_valid,
  input  logic                                  in_first,
  input  logic                                  in_last,
  input  mode_e                                 in_mode,
  input  fmt_e                                  in_fmt,
  input  logic [TM-1:0][KH-1:0][DW-1:0]         a_val,
  input  logic [TM-1:0][KH-1:0][META_W-1:0]     a_meta,
  input  logic [TN-1:0][2*KH-1:0][DW-1:0]       b_tile,
  input  logic [TM-1:0][TN-1:0][AW-1:0]         c_tile,
  output logic                                  out_valid,
  output logic [TM-1:0][TN-1:0][AW-1:0]         d_tile
);

  logic sparse;
  assign sparse = (in_mode == MODE_SPARSE);

  for (genvar r = 0; r < TM; r++) begin : g_row
    for (genvar n = 0; n < TN; n++) begin : g_col
      sparse_dot_unit #(.KH(KH), .DW(DW), .AW(AW)) u_lane (
        .clk    (clk),
        .rst_n  (rst_n),
        .valid  (in_valid),
        .first  (in_first),
        .sparse (sparse),
        .fmt    (in_fmt),
        .a_val  (a_val[r]),
        .a_meta (a_meta[r]),
        .b_col  (b_tile[n]),
        .c_in   (c_tile[r][n]),
        .acc    (d_tile[r][n])
      );
    end
  end

  // The last-beat flag travels down the same two stages as the lanes.
  logic s1_last;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_last   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_last   <= in_valid && in_last;
      out_valid <= s1_last;
    end
  end

  // An MMA's beats are contiguous: no first beat while one is still open.
  logic open_q;
  always_ff @(posedge clk) begin
    if (!rst_n)        open_q <= 1'b0;
    else if (in_valid) open_q <= !in_last;
  end

  always_ff @(posedge clk) begin
    if (rst_n && in_valid) begin
      beat_order: assert (in_first == !open_q)
        else $error("sparse_tensor_core: in_first must open each MMA and only that");
    end
  end

endmodule
