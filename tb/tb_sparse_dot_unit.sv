// Testbench for sparse_dot_unit, one dot-product lane.
//
// Runs a stream of MMAs of 1..4 beats, every other one in a random
// floating-point format (FP16, BF16, TF32 with FP32 accumulation onto a random
// FP32 C, or FP16 with an FP16 accumulator; expected values from the
// reference FP model), the others in INT8, with
// random idle cycles between some of them. Each beat is sparse or dense at
// random. For an INT8 sparse beat a random row of 2*KH values is magnitude-pruned to 2:4 and compressed by the
// reference model; the expected contribution is the dot product of the
// uncompressed pruned row with the B slice, so the lane's metadata selection
// is checked against plain arithmetic. A dense beat contributes the dot product
// of KH values with the first KH B elements. The accumulator is compared in
// exactly the cycle it must hold the MMA result: two clock edges after the
// last beat was sampled, which also checks the latency.
module tb_sparse_dot_unit;
  import sparse_pkg::*;
  import sparse_tb_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned KH = 16;
  localparam int unsigned DW = 8;
  localparam int unsigned AW = 32;

  logic                      clk = 1'b0;
  logic                      rst_n;
  logic                      valid, first, sparse;
  fmt_e                      fmt;
  logic [KH-1:0][DW-1:0]     a_val;
  logic [KH-1:0][META_W-1:0] a_meta;
  logic [2*KH-1:0][DW-1:0]   b_col;
  logic [AW-1:0]             c_in;
  logic [AW-1:0]             acc;

  sparse_dot_unit #(.KH(KH), .DW(DW), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_sparse = 0, n_dense = 0, n_padded = 0, n_back2back = 0;
  int n_fp[5] = '{0, 0, 0, 0, 0};

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Builds one beat into the input signals and returns its expected sum.
  function automatic longint make_beat(bit sp);
    longint s = 0;
    int_da b = rand_row(2*KH, 127, 5);
    for (int i = 0; i < 2*KH; i++) b_col[i] = DW'(b[i]);
    if (sp) begin
      int_da w, vals, meta;
      w = prune24(rand_row(2*KH, 127, 30));
      compress24(w, vals, meta);
      for (int j = 0; j < KH; j++) begin
        a_val[j]  = DW'(vals[j]);
        a_meta[j] = META_W'(meta[j]);
      end
      for (int g = 0; g < KH/2; g++)
        if (vals[2*g] == 0 || vals[2*g+1] == 0) n_padded++;
      for (int p = 0; p < 2*KH; p++) s += longint'(w[p]) * b[p];
    end else begin
      int_da a = rand_row(KH, 127, 10);
      for (int j = 0; j < KH; j++) begin
        a_val[j]  = DW'(a[j]);
        a_meta[j] = META_W'($urandom);
      end
      for (int j = 0; j < KH; j++) s += longint'(a[j]) * b[j];
    end
    return s;
  endfunction

  // Floating-point beat: random values, valid metadata; returns the FP32 sum.
  function automatic logic [31:0] make_fp_beat(fmt_e f, bit sp);
    logic [255:0] meta = '0;
    for (int i = 0; i < 2*KH; i++) b_col[i] = DW'($urandom);
    for (int j = 0; j < KH; j++) a_val[j] = DW'($urandom);
    // Keep exponents moderate so that sums stay finite.
    if (f == FMT_FP16 || f == FMT_FP16_ACC16) begin
      for (int j = 0; j < KH/2; j++) a_val[2*j +: 2] = rand_h(5, 20);
      for (int j = 0; j < KH; j++)   b_col[2*j +: 2] = rand_h(5, 20);
    end else if (f == FMT_BF16) begin
      for (int j = 0; j < KH/2; j++) a_val[2*j +: 2] = 16'(rand_f(110, 140) >> 16);
      for (int j = 0; j < KH; j++)   b_col[2*j +: 2] = 16'(rand_f(110, 140) >> 16);
    end else begin
      for (int j = 0; j < KH/4; j++) a_val[4*j +: 4] = rand_f(110, 140);
      for (int j = 0; j < KH/2; j++) b_col[4*j +: 4] = rand_f(110, 140);
    end
    for (int g = 0; g < KH/2; g++) begin
      int p0 = int'($urandom % 3);
      int p1 = p0 + 1 + int'($urandom % (3 - p0));
      a_meta[2*g]   = META_W'(p0);
      a_meta[2*g+1] = META_W'(p1);
    end
    if (f == FMT_TF32)
      for (int j = 0; j < KH; j++) a_meta[j] = META_W'($urandom);
    for (int j = 0; j < KH; j++) meta[2*j +: 2] = a_meta[j];
    return beat_sum(KH, int'(f), sp, 1024'(a_val), meta, 2048'(b_col));
  endfunction

  initial begin
    rst_n = 1'b0; valid = 1'b0; first = 1'b0; sparse = 1'b0; fmt = FMT_INT8;
    a_val = '0; a_meta = '0; b_col = '0; c_in = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int mma = 0; mma < 300; mma++) begin
      automatic int beats = 1 + int'($urandom % 4);
      automatic longint expect_v = longint'($signed(32'($urandom)));
      automatic bit gap = ($urandom % 3) == 0;
      automatic fmt_e f = (mma % 2 == 0) ? FMT_INT8 : fmt_e'($urandom % 5);
      automatic logic [31:0] fexp = (f == FMT_FP16_ACC16) ? {16'h0, rand_h(12, 18)} : rand_f(120, 135);
      if (gap) begin
        valid = 1'b0;
        @(negedge clk);
      end else if (mma > 0) begin
        n_back2back++;
      end
      c_in = (f == FMT_INT8) ? AW'(expect_v) : fexp;
      n_fp[f]++;
      for (int bt = 0; bt < beats; bt++) begin
        valid  = 1'b1;
        first  = (bt == 0);
        fmt    = f;
        sparse = 1'($urandom);
        if (sparse) n_sparse++; else n_dense++;
        if (f == FMT_INT8) expect_v += make_beat(sparse);
        else if (f == FMT_FP16_ACC16) fexp = {16'h0, f2h(add(h2f(fexp[15:0]), make_fp_beat(f, sparse)))};
        else               fexp = add(fexp, make_fp_beat(f, sparse));
        @(negedge clk);              // beat sampled at the edge just passed
      end
      if (f != FMT_INT8) expect_v = longint'(fexp);
      // Next MMA (or idle) is driven from here; the result must be in acc
      // after one more edge.
      fork
        begin
          automatic logic [AW-1:0] want = AW'(expect_v);
          @(posedge clk); #1;
          checks++;
          if (acc !== want) begin
            failures++;
            if (failures < 10) $display("MMA %0d: acc %0d want %0d", mma, $signed(acc), $signed(want));
          end
        end
      join_none
    end
    valid = 1'b0;
    repeat (4) @(negedge clk);

    // Mechanisms that must have occurred.
    checks += 5;
    if (n_fp[1] == 0 || n_fp[2] == 0 || n_fp[3] == 0 || n_fp[4] == 0) begin failures++; $display("a floating-point format never ran"); end
    if (n_sparse == 0)    begin failures++; $display("no sparse beat");  end
    if (n_dense == 0)     begin failures++; $display("no dense beat");   end
    if (n_padded == 0)    begin failures++; $display("no padded group"); end
    if (n_back2back == 0) begin failures++; $display("no back-to-back MMA"); end
    $display("sparse beats %0d, dense beats %0d, padded groups %0d, back-to-back MMAs %0d, MMAs INT8 %0d FP16 %0d BF16 %0d TF32 %0d FP16-acc %0d",
             n_sparse, n_dense, n_padded, n_back2back, n_fp[0], n_fp[1], n_fp[2], n_fp[3], n_fp[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
