// fp16_pkg: IEEE-754 half-precision helpers used by the scalar processing unit.
//
// Values are handled as sign, integer magnitude and power-of-two exponent
// (value = (-1)^s * mag * 2^e). fp16_pack normalises such a value, rounds to
// nearest (ties away from zero), saturates to the largest finite value (65504) on
// overflow and flushes results below the smallest normal number (2^-14) to zero.
// Subnormal inputs are read as zero; infinities and NaNs are not produced. These
// simplifications are this implementation's; the reference design only states that
// the SPU works in FP16.
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_MAX = 16'h7BFF;

  // (-1)^s * mag * 2^e  ->  fp16
  function automatic fp16_t fp16_pack(input logic s, input logic [63:0] mag, input int e);
    int p, ex;
    logic [63:0] m;
    logic [11:0] r;     // 11 significant bits + 1 round bit
    if (mag == 0) return 16'h0000;
    p = 0;
    for (int i = 0; i < 64; i++) if (mag[i]) p = i;
    // take 12 bits starting at the leading one
    if (p >= 11) m = mag >> (p - 11);
    else         m = mag << (11 - p);
    r  = m[11:0];
    m  = 64'(r[11:1]) + 64'(r[0]);     // round to 11 bits
    ex = p + e;
    if (m[11]) begin m = m >> 1; ex = ex + 1; end
    if (ex > 15)  return {s, FP16_MAX[14:0]};
    if (ex < -14) return 16'h0000;
    return {s, 5'(ex + 15), m[9:0]};
  endfunction

  // 11-bit magnitude with hidden one (0 for zero / subnormal), from bits [14:0]
  function automatic logic [10:0] fp16_mag(input logic [14:0] a);
    return (a[14:10] == 0) ? 11'd0 : {1'b1, a[9:0]};
  endfunction
  // exponent of the magnitude's least significant bit, from the exponent field
  function automatic int fp16_exp(input logic [4:0] ef);
    return int'(ef) - 25;
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    return fp16_pack(a[15] ^ b[15], 64'(fp16_mag(a[14:0])) * 64'(fp16_mag(b[14:0])), fp16_exp(a[14:10]) + fp16_exp(b[14:10]));
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    int ea, eb, e, d;
    logic signed [63:0] va, vb, sum;
    ea = fp16_exp(a[14:10]); eb = fp16_exp(b[14:10]);
    e  = (ea > eb) ? ea : eb;
    e  = e - 24;                         // keep 24 guard bits below the larger operand
    d  = ea - e; va = 64'(fp16_mag(a[14:0])) << d;
    d  = eb - e;
    if (d < 0) vb = (d <= -63) ? 64'd0 : 64'(fp16_mag(b[14:0])) >> (-d);
    else       vb = 64'(fp16_mag(b[14:0])) << d;
    d  = ea - e;
    if (ea - e < 0) va = (ea - e <= -63) ? 64'd0 : 64'(fp16_mag(a[14:0])) >> (e - ea);
    if (a[15]) va = -va;
    if (b[15]) vb = -vb;
    sum = va + vb;
    return (sum < 0) ? fp16_pack(1'b1, 64'(-sum), e) : fp16_pack(1'b0, 64'(sum), e);
  endfunction

  function automatic fp16_t fp16_neg(input fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // fp16 -> signed fixed point with F fraction bits, rounded, saturated to 48 bits
  function automatic logic signed [47:0] fp16_to_fix(input fp16_t a, input int F);
    int sh;
    logic [63:0] m;
    logic signed [47:0] r;
    sh = fp16_exp(a[14:10]) + F;
    if (fp16_mag(a[14:0]) == 0) return '0;
    if (sh >= 36) m = 64'h7FFF_FFFF_FFFF;
    else if (sh >= 0) m = 64'(fp16_mag(a[14:0])) << sh;
    else if (sh <= -12) m = 64'd0;
    else m = (64'(fp16_mag(a[14:0])) + (64'd1 << (-sh - 1))) >> (-sh);
    if (m > 64'h7FFF_FFFF_FFFF) m = 64'h7FFF_FFFF_FFFF;
    r = 48'(m);
    return a[15] ? -r : r;
  endfunction

  // signed fixed point with F fraction bits -> fp16
  function automatic fp16_t fp16_from_fix(input logic signed [63:0] v, input int F);
    return (v < 0) ? fp16_pack(1'b1, 64'(-v), -F) : fp16_pack(1'b0, 64'(v), -F);
  endfunction

  // 2^x for x <= 0 given in Q.16 fixed point; result in Q.16 (0 .. 65536).
  // Integer part by shifting, fraction by the cubic
  // 2^f ~= 1 + 0.6958 f + 0.2251 f^2 + 0.0791 f^3  (|error| < 1e-4 on [0,1)).
  function automatic logic [31:0] exp2_q16(input logic signed [31:0] x);
    logic signed [31:0] n;
    logic [31:0] f, p;
    if (x <= -32'sd1048576) return 32'd0;          // below 2^-16
    n = x >>> 16;                                    // floor
    f = 32'(x - (n <<< 16));                         // 0 .. 65535
    p = 32'd5184;                                    // 0.0791 * 2^16
    p = 32'd14752 + ((p * f) >> 16);                 // 0.2251
    p = 32'd45600 + ((p * f) >> 16);                 // 0.6958
    p = 32'd65536 + ((p * f) >> 16);
    return p >> (-n);
  endfunction

  // e^x for x <= 0 in Q.16 (x * log2(e), log2(e) = 94548 / 2^16)
  function automatic logic [31:0] exp_q16(input logic signed [31:0] x);
    logic signed [63:0] y;
    y = (64'(x) * 64'sd94548) >>> 16;
    if (y < -64'sd1048576) return 32'd0;
    return exp2_q16(32'(y));
  endfunction

endpackage
