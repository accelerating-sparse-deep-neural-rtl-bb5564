// End-to-end testbench of the sparse Tensor Core at its default size
// (8 x 4 output tile, 16 8-bit slots per lane, 32-bit accumulator), in all
// five input formats.
//
// The testbench plays the part of the software and memory around the core:
// it maps GEMMs D = A * B + C onto the core tile by tile (TM x TN outputs per
// MMA, K swept in beats), prunes A to 2:4 by magnitude and compresses it with
// the reference model, and computes every expected D with plain integer
// arithmetic on the uncompressed matrices. Phases:
//   1. a 16 x 8 x 128 GEMM with 2:4 A, run in sparse mode;
//   2. the same GEMM run in dense mode (the pruned A sent uncompressed): the
//      result must be identical and take exactly twice the beats;
//   3. MMAs of random length, mode switching from one MMA to the next, very
//      sparse A (groups with more than two zeros, stored with padding);
//   4. a published 4 x 8 channel-permutation example (weights x10):
//      pruning keeps a total magnitude of 83.7 unpermuted and 102.9 with
//      columns ordered E G A D C H B F; both pruned matrices run through the
//      core, and dense runs of the unpruned matrix show that permuting A's
//      columns with B's rows leaves A * B unchanged;
//   5. one MMA with K = 64 per floating-point format (FP16 and BF16 2:4
//      with an FP32 accumulator, FP16 2:4 with an FP16 accumulator, TF32
//      1:2), sparse and dense, expected values from the reference FP
//      model; sparse needs half the beats of dense, FP16 twice the beats of
//      INT8 per position and TF32 four times.
// Every MMA result is checked in the exact cycle the core must present it
// (two cycles after its last beat), and each mechanism is counted; one that
// never happened is a failure.
module tb_sparse_tensor_core;
  import sparse_pkg::*;
  import sparse_tb_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned TM = 8;
  localparam int unsigned TN = 4;
  localparam int unsigned KH = 16;
  localparam int unsigned DW = DATA_W;
  localparam int unsigned AW = ACC_W;

  logic                              clk = 1'b0;
  logic                              rst_n;
  logic                              in_valid, in_first, in_last;
  mode_e                             in_mode;
  fmt_e                              in_fmt;
  logic [TM-1:0][KH-1:0][DW-1:0]     a_val;
  logic [TM-1:0][KH-1:0][META_W-1:0] a_meta;
  logic [TN-1:0][2*KH-1:0][DW-1:0]   b_tile;
  logic [TM-1:0][TN-1:0][AW-1:0]     c_tile;
  logic                              out_valid;
  logic [TM-1:0][TN-1:0][AW-1:0]     d_tile;

  sparse_tensor_core dut (.*);

  always #5 clk = ~clk;

  typedef logic [TM-1:0][TN-1:0][AW-1:0] tile_t;

  typedef struct {
    logic                              first, last;
    mode_e                             mode;
    fmt_e                              fmt;
    logic [TM-1:0][KH-1:0][DW-1:0]     a_val;
    logic [TM-1:0][KH-1:0][META_W-1:0] a_meta;
    logic [TN-1:0][2*KH-1:0][DW-1:0]   b_tile;
    logic [TM-1:0][TN-1:0][AW-1:0]     c_tile;
  } beat_t;

  beat_t beats[$];
  tile_t expect_q[$];

  int checks = 0, failures = 0;
  int cycle = 0;
  // Mechanism counters.
  int n_sparse_mma = 0, n_dense_mma = 0, n_switch = 0, n_padded = 0;
  int n_fp_mma[5] = '{0, 0, 0, 0, 0};
  int n_back2back = 0, n_multibeat = 0, n_c_accum = 0, n_single = 0;
  mode_e last_mode = MODE_DENSE;
  bit    any_mma = 1'b0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Queue one MMA: arow[r] and bcol[n] are uncompressed length-k vectors.
  task automatic queue_mma(mode_e mode, int_da arow[TM], int_da bcol[TN], int c[TM][TN]);
    int k = arow[0].size();
    int kstep = (mode == MODE_SPARSE) ? 2*KH : KH;
    int nb = (k + kstep - 1) / kstep;
    int kp = nb * kstep;
    int_da ap[TM], bp[TN], vals[TM], meta[TM];
    tile_t want;
    for (int r = 0; r < TM; r++) begin
      ap[r] = new[kp];
      foreach (ap[r][i]) ap[r][i] = (i < k) ? arow[r][i] : 0;
      if (mode == MODE_SPARSE) begin
        compress24(ap[r], vals[r], meta[r]);
        for (int g = 0; g < kp/4; g++) if (vals[r][2*g] == 0 || vals[r][2*g+1] == 0) n_padded++;
      end
    end
    for (int n = 0; n < TN; n++) begin
      bp[n] = new[kp];
      foreach (bp[n][i]) bp[n][i] = (i < k) ? bcol[n][i] : 0;
    end
    for (int r = 0; r < TM; r++)
      for (int n = 0; n < TN; n++) begin
        longint s = longint'(c[r][n]);
        for (int i = 0; i < kp; i++) s += longint'(ap[r][i]) * bp[n][i];
        want[r][n] = AW'(s);
        if (c[r][n] != 0) n_c_accum++;
      end
    for (int bt = 0; bt < nb; bt++) begin
      beat_t b;
      b.first = (bt == 0);
      b.last  = (bt == nb - 1);
      b.mode  = mode;
      b.fmt   = FMT_INT8;
      for (int r = 0; r < TM; r++)
        for (int j = 0; j < KH; j++) begin
          if (mode == MODE_SPARSE) begin
            b.a_val[r][j]  = DW'(vals[r][bt*KH + j]);
            b.a_meta[r][j] = META_W'(meta[r][bt*KH + j]);
          end else begin
            b.a_val[r][j]  = DW'(ap[r][bt*KH + j]);
            b.a_meta[r][j] = META_W'($urandom);
          end
        end
      for (int n = 0; n < TN; n++)
        for (int i = 0; i < 2*KH; i++) begin
          if (mode == MODE_SPARSE)  b.b_tile[n][i] = DW'(bp[n][bt*2*KH + i]);
          else if (i < KH)          b.b_tile[n][i] = DW'(bp[n][bt*KH + i]);
          else                      b.b_tile[n][i] = DW'($urandom);   // must be ignored
        end
      for (int r = 0; r < TM; r++)
        for (int n = 0; n < TN; n++)
          b.c_tile[r][n] = bt == 0 ? AW'(c[r][n]) : AW'($urandom);    // read only at first
      beats.push_back(b);
    end
    expect_q.push_back(want);
    if (mode == MODE_SPARSE) n_sparse_mma++; else n_dense_mma++;
    if (any_mma && mode != last_mode) n_switch++;
    if (nb > 1) n_multibeat++; else n_single++;
    last_mode = mode;
    any_mma = 1'b1;
  endtask

  // Drive all queued beats back to back; returns the cycles from the first
  // beat to the cycle the last result is presented.
  task automatic run_queue(output int cycles);
    int start = cycle;
    int nb = beats.size();
    int nres = expect_q.size();
    int seen = 0;
    int last_out = -1;
    while (beats.size() > 0) begin
      beat_t b = beats.pop_front();
      in_valid = 1'b1;
      in_first = b.first; in_last = b.last; in_mode = b.mode; in_fmt = b.fmt;
      a_val = b.a_val; a_meta = b.a_meta; b_tile = b.b_tile; c_tile = b.c_tile;
      if (b.first && beats.size() + 1 < nb) n_back2back++;
      @(negedge clk);
      if (out_valid) begin seen++; last_out = cycle; end
    end
    in_valid = 1'b0;
    in_first = 1'b0; in_last = 1'b0;
    repeat (4) begin
      @(negedge clk);
      if (out_valid) begin seen++; last_out = cycle; end
    end
    check(seen == nres, $sformatf("%0d results for %0d MMAs", seen, nres));
    check(expect_q.size() == 0, "results left unchecked");
    expect_q.delete();
    // The last beat was sampled at edge start+nb-1 ... result shown after
    // two more edges.
    check(last_out == start + nb + 1,
          $sformatf("last result in cycle %0d, expected %0d", last_out - start, nb + 1));
    cycles = last_out - start;
  endtask

  // Result monitor: compares each presented tile with the oldest expectation.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (expect_q.size() == 0) check(1'b0, "unexpected result");
      else begin
        automatic tile_t want = expect_q.pop_front();
        for (int r = 0; r < TM; r++)
          for (int n = 0; n < TN; n++)
            check(d_tile[r][n] === want[r][n],
                  $sformatf("D[%0d][%0d] = %0d, want %0d", r, n,
                            $signed(d_tile[r][n]), $signed(want[r][n])));
      end
    end
  end
  always @(posedge clk) cycle++;

  // Queue one floating-point MMA covering k positions of K with random data.
  // Returns the number of beats. Values per beat: FP16/BF16 KH/2 (2:4 sparse
  // covers 2*KH/2 = KH positions, dense KH/2); TF32 KH/4 (1:2 sparse covers
  // KH/2, dense KH/4). The FP16-accumulator format takes FP16 inputs and keeps
  // an FP16 sum in the low 16 bits of each accumulator word.
  task automatic queue_fp_mma(fmt_e fmt, mode_e mode, int k, output int nb);
    bit sp = (mode == MODE_SPARSE);
    int kbeat = (fmt == FMT_TF32) ? (sp ? KH/2 : KH/4) : (sp ? KH : KH/2);
    logic [31:0] acc [TM][TN];
    nb = k / kbeat;
    for (int r = 0; r < TM; r++)
      for (int n = 0; n < TN; n++)
        acc[r][n] = (fmt == FMT_FP16_ACC16) ? {16'h0, rand_h(12, 18)} : rand_f(120, 135);
    for (int bt = 0; bt < nb; bt++) begin
      beat_t b;
      b.first = (bt == 0);
      b.last  = (bt == nb - 1);
      b.mode  = mode;
      b.fmt   = fmt;
      b.a_val = {TM*KH*DW/32{$urandom}};
      for (int r = 0; r < TM; r++) begin
        for (int j = 0; j < KH/4; j++) begin
          if (fmt == FMT_FP16 || fmt == FMT_FP16_ACC16) b.a_val[r][4*j +: 4] = {rand_h(5, 20), rand_h(5, 20)};
          else if (fmt == FMT_BF16) b.a_val[r][4*j +: 4] = {16'(rand_f(110, 140) >> 16), 16'(rand_f(110, 140) >> 16)};
          else                      b.a_val[r][4*j +: 4] = rand_f(110, 140);
        end
        for (int g = 0; g < KH/2; g++) begin
          int p0 = int'($urandom % 3);
          int p1 = p0 + 1 + int'($urandom % (3 - p0));
          b.a_meta[r][2*g]   = META_W'(p0);
          b.a_meta[r][2*g+1] = META_W'(p1);
        end
      end
      for (int n = 0; n < TN; n++)
        for (int j = 0; j < KH/2; j++) begin
          if (fmt == FMT_FP16 || fmt == FMT_FP16_ACC16) b.b_tile[n][4*j +: 4] = {rand_h(5, 20), rand_h(5, 20)};
          else if (fmt == FMT_BF16) b.b_tile[n][4*j +: 4] = {16'(rand_f(110, 140) >> 16), 16'(rand_f(110, 140) >> 16)};
          else                      b.b_tile[n][4*j +: 4] = rand_f(110, 140);
        end
      for (int r = 0; r < TM; r++)
        for (int n = 0; n < TN; n++) begin
          logic [31:0] bs;
          b.c_tile[r][n] = bt == 0 ? acc[r][n] : AW'($urandom);
          bs = beat_sum(KH, int'(fmt), sp, 1024'(b.a_val[r]),
                        256'(b.a_meta[r]), 2048'(b.b_tile[n]));
          if (fmt == FMT_FP16_ACC16) acc[r][n] = {16'h0, f2h(add(h2f(acc[r][n][15:0]), bs))};
          else                       acc[r][n] = add(acc[r][n], bs);
        end
      beats.push_back(b);
    end
    begin
      tile_t want;
      for (int r = 0; r < TM; r++)
        for (int n = 0; n < TN; n++) want[r][n] = acc[r][n];
      expect_q.push_back(want);
    end
    n_fp_mma[fmt]++;
    if (sp) n_sparse_mma++; else n_dense_mma++;
    if (any_mma && mode != last_mode) n_switch++;
    last_mode = mode;
  endtask

  // ---------------------------------------------------------------------
  // Full GEMM helpers. A is M x K (rows), B is K x N (stored as columns).
  int_da gA[$], gB[$];
  int    gC[$][$];

  task automatic queue_gemm(mode_e mode, int M, int N, int K);
    for (int mt = 0; mt < M/TM; mt++)
      for (int nt = 0; nt < N/TN; nt++) begin
        int_da arow[TM], bcol[TN];
        int c[TM][TN];
        for (int r = 0; r < TM; r++) arow[r] = gA[mt*TM + r];
        for (int n = 0; n < TN; n++) bcol[n] = gB[nt*TN + n];
        for (int r = 0; r < TM; r++)
          for (int n = 0; n < TN; n++) c[r][n] = gC[mt*TM + r][nt*TN + n];
        queue_mma(mode, arow, bcol, c);
      end
  endtask

  // Channel-permutation example, values x10.
  localparam int FIG_W [4][8] = '{
    '{13, 19,  2, 12, 42, 35, 72,  6},
    '{ 4, 11, 15, 69,  8, 67, 54, 88},
    '{ 2, 13, 80,  8, 42, 13, 56, 97},
    '{15,  6, 13,  5, 88, 42, 89, 89}};
  // Column order E G A D C H B F.
  localparam int FIG_P [8] = '{4, 6, 0, 3, 2, 7, 1, 5};

  initial begin
    automatic int cyc_sparse, cyc_dense, cyc;
    automatic int M = 16, N = 8, K = 128;
    rst_n = 1'b0; in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
    in_mode = MODE_DENSE; in_fmt = FMT_INT8; a_val = '0; a_meta = '0; b_tile = '0; c_tile = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Phase 1 and 2: one GEMM, sparse then dense.
    for (int m = 0; m < M; m++) gA.push_back(prune24(rand_row(K, 127, 0)));
    for (int n = 0; n < N; n++) gB.push_back(rand_row(K, 127, 0));
    for (int m = 0; m < M; m++) begin
      automatic int row[$];
      for (int n = 0; n < N; n++) row.push_back(int'($urandom % 20001) - 10000);
      gC.push_back(row);
    end
    foreach (gA[m]) check(is_24(gA[m]), "pruned row is 2:4");

    queue_gemm(MODE_SPARSE, M, N, K);
    run_queue(cyc_sparse);
    queue_gemm(MODE_DENSE, M, N, K);
    run_queue(cyc_dense);
    $display("GEMM %0dx%0dx%0d: sparse %0d cycles, dense %0d cycles", M, N, K, cyc_sparse, cyc_dense);
    // Beats: sparse = tiles * K/32, dense = tiles * K/16.
    check(cyc_sparse == (M/TM)*(N/TN)*(K/(2*KH)) + 1, "sparse GEMM beat count");
    check(cyc_dense  == (M/TM)*(N/TN)*(K/KH) + 1,     "dense GEMM beat count");
    check((cyc_dense - 1) == 2 * (cyc_sparse - 1),     "sparse mode twice the rate of dense");

    // Phase 3: random MMAs with mode switches and very sparse A.
    for (int t = 0; t < 40; t++) begin
      automatic int k = 2*KH * (1 + int'($urandom % 3));
      automatic mode_e mode = mode_e'($urandom % 2);
      int_da arow[TM], bcol[TN];
      int c[TM][TN];
      for (int r = 0; r < TM; r++) arow[r] = prune24(rand_row(k, 127, 60));
      for (int n = 0; n < TN; n++) bcol[n] = rand_row(k, 127, 0);
      for (int r = 0; r < TM; r++)
        for (int n = 0; n < TN; n++) c[r][n] = (t % 2 == 1) ? int'($urandom) : 0;
      queue_mma(mode, arow, bcol, c);
    end
    run_queue(cyc);

    // Phase 4: the permutation example.
    begin
      int_da orig[TM], perm[TM], porig[TM], pperm[TM], bcol[TN], bperm[TN];
      int c[TM][TN];
      automatic int mag_o = 0, mag_p = 0;
      for (int r = 0; r < TM; r++) begin
        orig[r] = new[8]; perm[r] = new[8];
        for (int i = 0; i < 8; i++) begin
          orig[r][i] = (r < 4) ? FIG_W[r][i] : 0;
          perm[r][i] = (r < 4) ? FIG_W[r][FIG_P[i]] : 0;
        end
        porig[r] = prune24(orig[r]);
        pperm[r] = prune24(perm[r]);
        foreach (porig[r][i]) mag_o += porig[r][i];
        foreach (pperm[r][i]) mag_p += pperm[r][i];
      end
      check(mag_o == 837,  $sformatf("pruned magnitude %0d, want 837", mag_o));
      check(mag_p == 1029, $sformatf("permuted pruned magnitude %0d, want 1029", mag_p));
      for (int n = 0; n < TN; n++) begin
        bcol[n] = rand_row(8, 127, 0);
        bperm[n] = new[8];
        for (int i = 0; i < 8; i++) bperm[n][i] = bcol[n][FIG_P[i]];
      end
      c = '{default: 0};
      queue_mma(MODE_SPARSE, porig, bcol, c);
      queue_mma(MODE_SPARSE, pperm, bperm, c);
      // Unpruned: permuted columns of A with permuted rows of B give the same D.
      queue_mma(MODE_DENSE, orig, bcol, c);
      queue_mma(MODE_DENSE, perm, bperm, c);
      begin
        automatic tile_t e0 = expect_q[2], e1 = expect_q[3];
        check(e0 == e1, "permutation leaves A*B unchanged");
      end
      run_queue(cyc);
    end

    // Phase 5: floating-point formats, K = 64 per MMA, sparse then dense.
    for (int f = 1; f < 5; f++) begin
      int nbs, nbd, cs, cd;
      queue_fp_mma(fmt_e'(f), MODE_SPARSE, 64, nbs);
      run_queue(cs);
      queue_fp_mma(fmt_e'(f), MODE_DENSE, 64, nbd);
      run_queue(cd);
      $display("format %0d, K = 64: sparse %0d beats, dense %0d beats", f, nbs, nbd);
      // FP16/BF16 (either accumulator): 16 / 8 positions per beat; TF32: 8 / 4.
      check(nbs == ((f == 3) ? 8 : 4) && nbd == 2 * nbs, "floating-point beat counts");
      check(cs == nbs + 1 && cd == nbd + 1, "floating-point MMA cycle counts");
    end

    // Mechanisms.
    check(n_fp_mma[1] > 0 && n_fp_mma[2] > 0 && n_fp_mma[3] > 0 && n_fp_mma[4] > 0,
          "every floating-point format ran");
    check(n_sparse_mma > 0, "sparse MMA happened");
    check(n_dense_mma > 0,  "dense MMA happened");
    check(n_switch > 0,     "mode switch happened");
    check(n_padded > 0,     "padded group (more than two zeros) happened");
    check(n_back2back > 0,  "back-to-back MMAs happened");
    check(n_multibeat > 0,  "multi-beat MMA happened");
    check(n_single > 0,     "single-beat MMA happened");
    check(n_c_accum > 0,    "accumulation onto nonzero C happened");
    $display("MMAs: sparse %0d dense %0d, mode switches %0d, padded groups %0d, back-to-back %0d, multi-beat %0d, single-beat %0d, C terms %0d",
             n_sparse_mma, n_dense_mma, n_switch, n_padded, n_back2back, n_multibeat, n_single, n_c_accum);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
