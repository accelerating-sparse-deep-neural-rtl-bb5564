// Testbench for fp_dot_sum, the FP16 / BF16 / TF32 dot product of one beat.
//
// Random A rows, metadata and B slices in every floating-point format (the
// FP16-accumulator format reads its inputs as FP16), sparse
// and dense. The expected FP32 sum is built with the reference model: values
// decoded by formula, B values picked by explicit index arithmetic (2:4 for
// FP16/BF16, 1:2 for TF32), each product and each running sum rounded to FP32
// in the same order as the design (j = 0 first, starting from +0). Most
// exponents are moderate; some beats use the full exponent range (overflow,
// flush to zero, infinities, NaN) and FP16 subnormals. The INT8 format must
// give +0. Results are compared bit for bit.
module tb_fp_dot_sum;
  import sparse_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned KH = 16;

  fmt_e                      fmt;
  logic                      sparse;
  logic [KH*8-1:0]           a_row;
  logic [KH-1:0][META_W-1:0] a_meta;
  logic [2*KH*8-1:0]         b_row;
  logic [31:0]               sum;

  fp_dot_sum #(.KH(KH)) dut (.*);

  int checks = 0, failures = 0;
  int n_fmt[5] = '{0, 0, 0, 0, 0};
  int n_special = 0;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] expected();
    logic [31:0] s = 32'h0;
    if (fmt == FMT_FP16 || fmt == FMT_FP16_ACC16 || fmt == FMT_BF16) begin
      for (int j = 0; j < KH/2; j++) begin
        int src = sparse ? 4*(j/2) + int'(a_meta[j]) : j;
        logic [15:0] a = a_row[16*j +: 16], b = b_row[16*src +: 16];
        logic [31:0] a32 = (fmt != FMT_BF16) ? h2f(a) : {a, 16'h0};
        logic [31:0] b32 = (fmt != FMT_BF16) ? h2f(b) : {b, 16'h0};
        s = add(s, mul(a32, b32));
      end
    end else if (fmt == FMT_TF32) begin
      for (int j = 0; j < KH/4; j++) begin
        int src = sparse ? 2*j + int'(a_meta[j][0]) : j;
        logic [31:0] a32 = {a_row[32*j + 13 +: 19], 13'h0};
        logic [31:0] b32 = {b_row[32*src + 13 +: 19], 13'h0};
        s = add(s, mul(a32, b32));
      end
    end
    return s;
  endfunction

  initial begin
    for (int it = 0; it < 4000; it++) begin
      automatic bit wide = ($urandom % 10) == 0;
      fmt    = fmt_e'($urandom % 5);
      sparse = 1'($urandom);
      n_fmt[fmt]++;
      for (int j = 0; j < KH; j++) a_meta[j] = META_W'($urandom);
      if (fmt == FMT_FP16 || fmt == FMT_FP16_ACC16) begin
        for (int j = 0; j < KH/2; j++)   a_row[16*j +: 16] = wide ? rand_h(0, 31) : rand_h(0, 20);
        for (int j = 0; j < KH; j++)     b_row[16*j +: 16] = wide ? rand_h(0, 31) : rand_h(0, 20);
      end else if (fmt == FMT_BF16) begin
        for (int j = 0; j < KH/2; j++)   a_row[16*j +: 16] = 16'((wide ? rand_f(0, 255) : rand_f(100, 150)) >> 16);
        for (int j = 0; j < KH; j++)     b_row[16*j +: 16] = 16'((wide ? rand_f(0, 255) : rand_f(100, 150)) >> 16);
      end else begin
        for (int j = 0; j < KH/4; j++)   a_row[32*j +: 32] = wide ? rand_f(0, 255) : rand_f(100, 150);
        for (int j = 0; j < KH/2; j++)   b_row[32*j +: 32] = wide ? rand_f(0, 255) : rand_f(100, 150);
      end
      // Some exact zeros, and cancelling pairs.
      if (($urandom % 8) == 0) a_row[15:0] = 16'h0;
      if (wide) n_special++;
      #1;
      begin
        automatic logic [31:0] want = expected();
        checks++;
        if (sum !== want) begin
          failures++;
          if (failures < 10)
            $display("fmt %0d sparse %0d: sum %h want %h", fmt, sparse, sum, want);
        end
      end
    end
    checks++;
    if (n_fmt[0] == 0 || n_fmt[1] == 0 || n_fmt[2] == 0 || n_fmt[3] == 0 || n_fmt[4] == 0 || n_special == 0) begin
      failures++;
      $display("a format or the special-value beats never occurred");
    end
    $display("beats per format INT8 %0d FP16 %0d BF16 %0d TF32 %0d FP16/FP16-acc %0d, wide-range %0d",
             n_fmt[0], n_fmt[1], n_fmt[2], n_fmt[3], n_fmt[4], n_special);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
