// fp_dot_sum: floating-point dot product of one beat of the sparse Tensor
// Core lane (FP16, BF16 and TF32 inputs, FP32 result).
//
// The A row (KH slots of DW bits) and the B slice (2*KH slots) are read as 16-bit
// values (FP16, BF16) or 32-bit words (TF32):
//   FP16/BF16: NV = KH*DW/16 A values, 2*NV B values. Sparse mode is 2:4: A value j
//              meets B value 4*(j/2) + meta[j]. Dense mode: B value j.
//   TF32:      NV = KH*DW/32 A values, 2*NV B values. Sparse mode is 1:2: A value
//              j meets B value 2*j + meta[j][0]. Dense mode: B value j.
// So, with the same bits per beat, sparse mode covers twice the K of dense
// mode in every format, and an FP16 beat covers half the K of an INT8 beat
// and a TF32 beat a quarter, the ratios of the throughput table of the
// original design. The supported formats and the 1:2 pattern for TF32 follow
// the original design. The bit layout, the exact products, the summation
// order (products added one by one, j = 0 first, onto +0, each addition
// rounded to FP32 with ties to even) and the flush-to-zero of FP32
// subnormals are this implementation's choices.
//
// Interface: combinational. fmt selects the format (FMT_FP16_ACC16 is read
// as FP16; FMT_INT8 gives +0 here;
// the integer sum lives in sparse_dot_unit). sum is an FP32 bit pattern.
module fp_dot_sum
  import sparse_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned KH = 16,      // slots in an A row
  parameter int unsigned DW = 8        // bits per slot
) (
  input  fmt_e                      fmt,
  input  logic                      sparse,
  input  logic [KH*DW-1:0]          a_row,
  input  logic [KH-1:0][META_W-1:0] a_meta,
  input  logic [2*KH*DW-1:0]        b_row,
  output logic [31:0]               sum
);

  localparam int unsigned NV16 = KH * DW / 16;  // FP16/BF16 values in an A row
  localparam int unsigned NV32 = KH * DW / 32;  // TF32 values in an A row

  if ((KH * DW) % 64 != 0 || NV16 > KH) begin : g_bad_size
    $error("fp_dot_sum: an A row must hold an even number of 32-bit words");
  end

  always_comb begin
    int unsigned src;
    logic [31:0] a32, b32;
    sum = 32'h0;
    src = 0;
    a32 = 32'h0;
    b32 = 32'h0;
    if (fmt == FMT_FP16 || fmt == FMT_FP16_ACC16 || fmt == FMT_BF16) begin
      for (int unsigned j = 0; j < NV16; j++) begin
        src = sparse ? GROUP*(j/KEEP) + int'(a_meta[j]) : j;
        if (fmt != FMT_BF16) begin
          a32 = fp16_to_fp32(a_row[16*j +: 16]);
          b32 = fp16_to_fp32(b_row[16*src +: 16]);
        end else begin
          a32 = bf16_to_fp32(a_row[16*j +: 16]);
          b32 = bf16_to_fp32(b_row[16*src +: 16]);
        end
        sum = fp32_add(sum, fp32_mul(a32, b32));
      end
    end else if (fmt == FMT_TF32) begin
      for (int unsigned j = 0; j < NV32; j++) begin
        src = sparse ? 2*j + int'(a_meta[j][0]) : j;
        sum = fp32_add(sum, fp32_mul(tf32_to_fp32(a_row[32*j +: 32]),
                                     tf32_to_fp32(b_row[32*src +: 32])));
      end
    end
  end

endmodule
