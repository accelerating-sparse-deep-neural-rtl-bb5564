// meta_select: metadata-driven B operand selector of the sparse Tensor Core.
//
// In 2:4 sparse mode the A row arrives compressed: KH stored values, two per
// group of four positions along K, each with a 2-bit index of its position in
// the group. To multiply only what matters, each stored value j must meet the
// B element at the same K position, namely b_col[4*(j/2) + meta[j]]. This
// module is that selection, one 4:1 multiplexer per stored value, so that
// KH multipliers cover K = 2*KH elements of the B column per beat.
//
// In dense mode the A row holds KH plain values and the multipliers take
// B elements 0..KH-1 directly (the upper half of b_col is unused), so a dense
// beat covers half the K of a sparse beat: this is where the doubled math
// throughput of sparse mode comes from.
//
// The selection by metadata and the 2-bit position code follow the original
// design; the dense-mode bypass path is this implementation's choice.
//
// Interface: purely combinational, no clock.
//   sparse  1 = sparse mode, 0 = dense mode
//   meta    KH 2-bit indices (ignored in dense mode)
//   b_col   2*KH elements of one B column, element 0 = lowest K
//   b_sel   KH selected B elements, b_sel[j] pairs with A value j
module meta_select
  import sparse_pkg::*;
#(
  parameter int unsigned KH = 16,       // stored A values per beat (K/2)
  parameter int unsigned DW = DATA_W    // operand width
) (
  input  logic                     sparse,
  input  logic [KH-1:0][META_W-1:0] meta,
  input  logic [2*KH-1:0][DW-1:0]   b_col,
  output logic [KH-1:0][DW-1:0]     b_sel
);

  // Two stored values per group of four: KH must be even.
  if (KH % KEEP != 0) begin : g_bad_kh
    $error("meta_select: KH must be a multiple of 2");
  end

  always_comb begin
    for (int unsigned j = 0; j < KH; j++) begin
      if (sparse) begin
        // Group j/2 of the B column starts at element 4*(j/2).
        b_sel[j] = b_col[GROUP*(j/KEEP) + int'(meta[j])];
      end else begin
        b_sel[j] = b_col[j];
      end
    end
  end

endmodule
