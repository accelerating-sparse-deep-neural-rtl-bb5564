// Reference floating-point model for the testbenches of the Tensor Core's
// floating-point modes. It works on double-precision reals: a value is
// decoded from its bit pattern by formula, products and sums of two FP32
// values are formed exactly or nearly so in double precision, and the result
// is rounded to FP32 (ties to even) from the double's bit pattern. Double
// has more than twice FP32's precision plus two bits, so rounding a double
// sum or product of FP32 values to FP32 gives the correctly rounded result.
// Conventions matched to the design: FP32 subnormal inputs read as zero,
// subnormal results flushed to signed zero, NaN results are 0x7FC00000,
// x + (-x) = +0.
package fp_ref_pkg;

  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) repeat (e) r = r * 2.0;
    else        repeat (-e) r = r / 2.0;
    return r;
  endfunction

  // Value of a finite, normal FP32 pattern (zero for exponent 0).
  function automatic real f32_val(logic [31:0] x);
    real m;
    if (x[30:23] == 0) return 0.0;
    m = 1.0 + real'(x[22:0]) / 8388608.0;
    return (x[31] ? -m : m) * pow2(int'(x[30:23]) - 127);
  endfunction

  // Half precision to FP32 pattern, via its value.
  function automatic logic [31:0] h2f(logic [15:0] h);
    real v;
    if (h[14:10] == 5'h1F) return (h[9:0] == 0) ? {h[15], 8'hFF, 23'h0} : QNAN;
    if (h[14:10] == 0) v = real'(h[9:0]) * pow2(-24);
    else               v = (1.0 + real'(h[9:0]) / 1024.0) * pow2(int'(h[14:10]) - 15);
    if (h[14:0] == 0) return {h[15], 31'h0};
    return round32(h[15] ? -v : v);
  endfunction

  // Round a double to FP32 (ties to even, flush to zero, overflow to inf).
  function automatic logic [31:0] round32(real x);
    logic [63:0] d = $realtobits(x);
    logic        s = d[63];
    int          e;
    logic [24:0] m;
    logic        rb, st;
    if (d[62:0] == 0) return {s, 31'h0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    rb = d[28];
    st = |d[27:0];
    if (rb && (st || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {s, 8'hFF, 23'h0};
    if (e <= 0)   return {s, 31'h0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic bit nan(logic [31:0] x);  return x[30:23] == 8'hFF && x[22:0] != 0; endfunction
  function automatic bit inf(logic [31:0] x);  return x[30:23] == 8'hFF && x[22:0] == 0; endfunction
  function automatic bit zero(logic [31:0] x); return x[30:23] == 0; endfunction

  function automatic logic [31:0] mul(logic [31:0] a, logic [31:0] b);
    logic s = a[31] ^ b[31];
    if (nan(a) || nan(b)) return QNAN;
    if ((inf(a) && zero(b)) || (zero(a) && inf(b))) return QNAN;
    if (inf(a) || inf(b)) return {s, 8'hFF, 23'h0};
    if (zero(a) || zero(b)) return {s, 31'h0};
    return round32(f32_val(a) * f32_val(b));
  endfunction

  function automatic logic [31:0] add(logic [31:0] a, logic [31:0] b);
    real v;
    if (nan(a) || nan(b)) return QNAN;
    if (inf(a) && inf(b)) return (a[31] == b[31]) ? a : QNAN;
    if (inf(a)) return a;
    if (inf(b)) return b;
    if (zero(a) && zero(b)) return {a[31] & b[31], 31'h0};
    if (zero(a)) return b;
    if (zero(b)) return a;
    v = f32_val(a) + f32_val(b);
    if (v == 0.0) return 32'h0;
    return round32(v);
  endfunction

  // Round an FP32 pattern to IEEE half (ties to even), by value: values under
  // 2^-14 are counted in units of 2^-24, others rounded to 11 significant bits.
  function automatic logic [15:0] f2h(logic [31:0] x);
    real v, a, q, n;
    int  e;
    logic s = x[31];
    if (nan(x))  return 16'h7E00;
    if (inf(x))  return {s, 5'h1F, 10'h0};
    if (zero(x)) return {s, 15'h0};
    v = f32_val(x);
    a = (v < 0.0) ? -v : v;
    // Exponent e with 2^e <= a < 2^(e+1), but not below -14.
    e = -14;
    while (pow2(e + 1) <= a) e++;
    q = a / pow2(e - 10);            // exact: fewer than 53 bits
    n = $floor(q);
    if (q - n > 0.5 || (q - n == 0.5 && (longint'(n) % 2) == 1)) n = n + 1.0;
    if (n * pow2(e - 10) >= 65520.0 || e > 15) return {s, 5'h1F, 10'h0};
    // n < 2^11 here, or exactly 2^11 after a carry.
    if (n >= 2048.0) begin n = n / 2.0; e++; end
    if (e > 15) return {s, 5'h1F, 10'h0};
    if (n < 1024.0) return {s, 5'h0, 10'(longint'(n))};            // subnormal
    return {s, 5'(e + 15), 10'(longint'(n) - 1024)};
  endfunction

  // Expected FP32 sum of one beat of a lane with KH 8-bit slots: A row and
  // metadata as the design takes them, B slice of 2*KH slots.
  // fmt: 1 or 4 = FP16, 2 = BF16, 3 = TF32 (1:2 when sparse).
  function automatic logic [31:0] beat_sum(int kh, int fmt, bit sparse,
                                           logic [1023:0] a_row, logic [255:0] meta,
                                           logic [2047:0] b_row);
    logic [31:0] s = 32'h0;
    if (fmt == 1 || fmt == 2 || fmt == 4) begin
      for (int j = 0; j < kh/2; j++) begin
        int src = sparse ? 4*(j/2) + int'(meta[2*j +: 2]) : j;
        logic [15:0] a = a_row[16*j +: 16], b = b_row[16*src +: 16];
        logic [31:0] a32 = (fmt != 2) ? h2f(a) : {a, 16'h0};
        logic [31:0] b32 = (fmt != 2) ? h2f(b) : {b, 16'h0};
        s = add(s, mul(a32, b32));
      end
    end else if (fmt == 3) begin
      for (int j = 0; j < kh/4; j++) begin
        int src = sparse ? 2*j + int'(meta[2*j]) : j;
        logic [31:0] a32 = {a_row[32*j + 13 +: 19], 13'h0};
        logic [31:0] b32 = {b_row[32*src + 13 +: 19], 13'h0};
        s = add(s, mul(a32, b32));
      end
    end
    return s;
  endfunction

  // Random FP16 pattern: finite, exponent field in [emin, emax].
  function automatic logic [15:0] rand_h(int emin, int emax);
    return {1'($urandom), 5'(emin + int'($urandom % (emax - emin + 1))), 10'($urandom)};
  endfunction

  // Random FP32-layout pattern (BF16 / TF32 use its upper bits).
  function automatic logic [31:0] rand_f(int emin, int emax);
    return {1'($urandom), 8'(emin + int'($urandom % (emax - emin + 1))), 23'($urandom)};
  endfunction

endpackage
