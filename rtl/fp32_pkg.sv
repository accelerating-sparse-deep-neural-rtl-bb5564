// Floating-point helper functions for the floating-point modes of the
// sparse Tensor Core: input format conversion, and single-precision (FP32)
// multiply and add.
//
// Conversions to FP32:
//   fp16_to_fp32  IEEE half (1-5-10); exact, half subnormals included;
//   bf16_to_fp32  bfloat16 (1-8-7), the upper half of an FP32 word;
//   fp32_to_fp16  FP32 to IEEE half, round to nearest even, half subnormals
//                 produced, overflow to infinity, NaN to 0x7E00;
//   tf32_to_fp32  TF32 (1-8-10): an FP32 word of which only the upper 19 bits
//                 (sign, exponent, 10 fraction bits) are used, the lower 13
//                 are ignored.
// Arithmetic (fp32_mul, fp32_add):
//   round to nearest, ties to even; subnormal FP32 inputs are read as zero
//   and subnormal results are flushed to a zero of the same sign; overflow
//   gives infinity; every NaN result is the quiet NaN 0x7FC00000; x + (-x) is
//   +0. These conventions are this implementation's choices.
// All functions are pure and synthesizable (combinational logic).
package fp32_pkg;

  localparam logic [31:0] FP32_QNAN = 32'h7FC0_0000;

  function automatic logic is_nan(logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] != '0);
  endfunction

  function automatic logic is_inf(logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] == '0);
  endfunction

  // Zero or subnormal: both count as zero.
  function automatic logic is_zero(logic [31:0] x);
    return x[30:23] == 8'h00;
  endfunction

  function automatic logic [31:0] fp16_to_fp32(logic [15:0] h);
    logic        s;
    logic [4:0]  e;
    logic [9:0]  f;
    logic [31:0] r;
    int          p;
    s = h[15]; e = h[14:10]; f = h[9:0];
    if (e == 5'h1F) begin
      r = (f == '0) ? {s, 8'hFF, 23'h0} : FP32_QNAN;
    end else if (e == 5'h00) begin
      if (f == '0) begin
        r = {s, 31'h0};
      end else begin
        // Subnormal half: f * 2^-24, renormalised around its top set bit.
        p = 0;
        for (int i = 0; i < 10; i++) if (f[i]) p = i;
        r = {s, 8'(p - 24 + 127), 23'((32'(f) << (23 - p)) & 32'h007F_FFFF)};
      end
    end else begin
      r = {s, 8'(int'(e) - 15 + 127), f, 13'h0};
    end
    return r;
  endfunction

  function automatic logic [31:0] bf16_to_fp32(logic [15:0] h);
    return {h, 16'h0};
  endfunction

  function automatic logic [31:0] tf32_to_fp32(logic [31:0] w);
    return {w[31:13], 13'h0};
  endfunction

  localparam logic [15:0] FP16_QNAN = 16'h7E00;

  function automatic logic [15:0] fp32_to_fp16(logic [31:0] x);
    logic        s;
    int          e, sh;
    logic [23:0] m;
    logic [11:0] q;     // kept bits, one spare bit for the rounding carry
    logic        rb, st;
    s = x[31];
    if (is_nan(x))  return FP16_QNAN;
    if (is_inf(x))  return {s, 5'h1F, 10'h0};
    if (is_zero(x)) return {s, 15'h0};
    m = {1'b1, x[22:0]};
    e = int'(x[30:23]) - 127 + 15;
    if (e >= 1) begin
      q  = {1'b0, m[23:13]};
      rb = m[12];
      st = |m[11:0];
      if (rb && (st || q[0])) q = q + 12'd1;
      if (q[11]) begin
        q = q >> 1;
        e = e + 1;
      end
      if (e >= 31) return {s, 5'h1F, 10'h0};
      return {s, 5'(e), q[9:0]};
    end
    // Half subnormal: fraction in units of 2^-24.
    sh = 14 - e;                     // at least 14
    if (sh > 24) return {s, 15'h0};
    q  = 12'(m >> sh);
    rb = m[sh-1];
    st = |(m & ((24'd1 << (sh - 1)) - 24'd1));
    if (rb && (st || q[0])) q = q + 12'd1;
    return {s, 15'(q)};              // a carry into bit 10 gives the smallest normal
  endfunction

  // Round a normalised significand and pack. m holds the 24-bit significand
  // (leading one at bit 23), rb the round bit, st the sticky bit.
  function automatic logic [31:0] round_pack(logic s, int e, logic [23:0] m, logic rb, logic st);
    logic [24:0] mr;
    int          er;
    mr = {1'b0, m};
    er = e;
    if (rb && (st || m[0])) mr = mr + 25'd1;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 255) return {s, 8'hFF, 23'h0};
    if (er <= 0)   return {s, 31'h0};
    return {s, 8'(er), mr[22:0]};
  endfunction

  function automatic logic [31:0] fp32_mul(logic [31:0] a, logic [31:0] b);
    logic        s;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if (is_nan(a) || is_nan(b)) return FP32_QNAN;
    if ((is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b))) return FP32_QNAN;
    if (is_inf(a) || is_inf(b)) return {s, 8'hFF, 23'h0};
    if (is_zero(a) || is_zero(b)) return {s, 31'h0};
    p = {24'h0, 1'b1, a[22:0]} * {24'h0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return round_pack(s, e + 1, p[47:24], p[23], |p[22:0]);
    else       return round_pack(s, e,     p[46:23], p[22], |p[21:0]);
  endfunction

  function automatic logic [31:0] fp32_add(logic [31:0] a, logic [31:0] b);
    logic        sa, sb, s;
    int          ea, eb, d, e, lead;
    logic [49:0] ma, mb, sh;
    logic [50:0] r;
    logic        st;
    if (is_nan(a) || is_nan(b)) return FP32_QNAN;
    if (is_inf(a) && is_inf(b)) return (a[31] == b[31]) ? a : FP32_QNAN;
    if (is_inf(a)) return a;
    if (is_inf(b)) return b;
    if (is_zero(a) && is_zero(b)) return {a[31] & b[31], 31'h0};
    if (is_zero(a)) return b;
    if (is_zero(b)) return a;
    // Order the operands so that |a| >= |b|.
    if (a[30:0] < b[30:0]) begin
      logic [31:0] t;
      t = a; a = b; b = t;
    end
    sa = a[31]; sb = b[31];
    ea = int'(a[30:23]); eb = int'(b[30:23]);
    ma = {1'b1, a[22:0], 26'h0};
    mb = {1'b1, b[22:0], 26'h0};
    d  = ea - eb;
    // Align b; bits shifted out are kept as a sticky bit in bit 0.
    if (d > 49) begin
      mb = 50'd1;
    end else if (d > 0) begin
      sh = mb >> d;
      st = |(mb & ((50'd1 << d) - 50'd1));
      mb = sh | {49'h0, st};
    end
    s = sa;
    e = ea;
    if (sa == sb) r = {1'b0, ma} + {1'b0, mb};
    else          r = {1'b0, ma} - {1'b0, mb};
    if (r == '0) return 32'h0;
    if (r[50]) begin
      r = {1'b0, r[50:2], r[1] | r[0]};
      e = e + 1;
    end else begin
      lead = 49;
      for (int i = 0; i < 50; i++) if (r[i]) lead = i;
      r = r << (49 - lead);
      e = e - (49 - lead);
    end
    return round_pack(s, e, r[49:26], r[25], |r[24:0]);
  endfunction

endpackage
