// sparse_dot_unit: one dot-product lane of the sparse Tensor Core.
//
// Each beat, the lane multiplies A values with B values and adds the sum of
// the products to its accumulator. In the INT8 format (fmt = FMT_INT8) there
// are KH signed 8-bit A values; in FP16/BF16 the same bits hold KH/2 values
// and in TF32 KH/4, handled by fp_dot_sum with FP32 accumulation. In sparse mode the A values are
// the stored nonzeros of a 2:4 compressed row and meta_select picks, from a
// B slice of 2*KH elements, the one B element each nonzero needs, so that one
// INT8 beat covers K = 2*KH of the dot product. In dense mode it covers
// K = KH. (TF32 uses the 1:2 pattern instead, see fp_dot_sum.) The
// multiply-by-selected-B, the accumulator and the formats follow the original
// design; the lane width, the adder tree, the two-stage pipeline and the
// floating-point conventions are this implementation's choices.
//
// Pipeline (no back-pressure, one beat per clock):
//   stage 1: select B, multiply, sum the KH products in a tree, register the
//            sum together with c_in and the first flag;
//   stage 2: acc <= (first ? c_in : acc) + sum.
// A beat presented with valid in cycle t is part of acc after the clock edge
// that ends cycle t+1. INT8 arithmetic is signed DW x DW products into a
// wrapping AW-bit two's-complement accumulator; floating-point formats keep
// an FP32 bit pattern in acc (AW must then be 32) and add with fp32_add.
// With FMT_FP16_ACC16 the accumulator is an FP16 pattern in the low 16 bits
// (C likewise): the beat's FP32 sum is added to it in FP32 and the result is
// rounded back to FP16 at every beat.
//
// Interface:
//   valid, first  beat present / first beat of an MMA (start from c_in)
//   sparse        mode of this beat
//   fmt           format of this beat (one format per MMA)
//   a_val, a_meta KH A values and their 2-bit positions (sparse mode)
//   b_col         2*KH elements of the B column
//   c_in          accumulator start value, taken with the first beat
//   acc           accumulator
// Reset is synchronous and active low; it clears the pipeline and acc.
module sparse_dot_unit
  import sparse_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned KH = 16,       // multipliers = stored A values per beat
  parameter int unsigned DW = DATA_W,   // operand width
  parameter int unsigned AW = ACC_W     // accumulator width
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid,
  input  logic                      first,
  input  logic                      sparse,
  input  fmt_e                      fmt,
  input  logic [KH-1:0][DW-1:0]     a_val,
  input  logic [KH-1:0][META_W-1:0] a_meta,
  input  logic [2*KH-1:0][DW-1:0]   b_col,
  input  logic [AW-1:0]             c_in,
  output logic [AW-1:0]             acc
);

  logic [KH-1:0][DW-1:0] b_sel;

  meta_select #(.KH(KH), .DW(DW)) u_sel (
    .sparse (sparse),
    .meta   (a_meta),
    .b_col  (b_col),
    .b_sel  (b_sel)
  );

  // Integer products and their sum, sign-extended to the accumulator width.
  logic signed [AW-1:0] int_sum;
  always_comb begin
    int_sum = '0;
    for (int unsigned j = 0; j < KH; j++) begin
      int_sum += AW'($signed(a_val[j]) * $signed(b_sel[j]));
    end
  end

  // Floating-point products and their FP32 sum (FP16, BF16, TF32).
  logic [31:0] fp_sum;
  fp_dot_sum #(.KH(KH), .DW(DW)) u_fp (
    .fmt    (fmt),
    .sparse (sparse),
    .a_row  (a_val),
    .a_meta (a_meta),
    .b_row  (b_col),
    .sum    (fp_sum)
  );

  logic [AW-1:0] sum;
  assign sum = (fmt == FMT_INT8) ? AW'(int_sum) : AW'(fp_sum);

  // Stage 1 registers.
  logic          s1_valid, s1_first;
  fmt_e          s1_fmt;
  logic [AW-1:0] s1_sum, s1_c;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_fmt   <= FMT_INT8;
      s1_sum   <= '0;
      s1_c     <= '0;
    end else begin
      s1_valid <= valid;
      if (valid) begin
        s1_first <= first;
        s1_fmt   <= fmt;
        s1_sum   <= sum;
        s1_c     <= c_in;
      end
    end
  end

  // Stage 2: accumulator, integer or FP32.
  logic [AW-1:0] acc_base;
  assign acc_base = s1_first ? s1_c : acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (s1_valid) begin
      if (s1_fmt == FMT_INT8)
        acc <= acc_base + s1_sum;
      else if (s1_fmt == FMT_FP16_ACC16)
        acc <= AW'(fp32_to_fp16(fp32_add(fp16_to_fp32(acc_base[15:0]), 32'(s1_sum))));
      else
        acc <= AW'(fp32_add(32'(acc_base), 32'(s1_sum)));
    end
  end

  // The two stored values of a 2:4 group sit at two different positions
  // (INT8: KH/2 groups, FP16/BF16: half as many; TF32 is 1:2).
  always_ff @(posedge clk) begin
    if (rst_n && valid && sparse && fmt != FMT_TF32) begin
      for (int unsigned g = 0; g < KH / KEEP; g++) begin
        if (fmt == FMT_INT8 || g < KH * DW / 32) begin
          a_meta_distinct: assert (a_meta[KEEP*g] != a_meta[KEEP*g+1])
            else $error("sparse_dot_unit: group %0d has two values at one position", g);
        end
      end
    end
  end

endmodule
