// fp16_pkg: IEEE-754 binary16 arithmetic used by every lane of the PIM SIMD ALU.
//
// The PIM datapath operates on 16-bit floating-point values (sixteen of them per 256-bit
// DRAM word). This package provides the two lane operations the ALU is built from, as
// combinational functions:
//   fp16_add(a, b) : a + b, one rounding
//   fp16_mul(a, b) : a * b, one rounding
// Both compute the exact result, round it to nearest-even, and then apply the range rules:
// a result whose rounded exponent is above the largest normal becomes infinity, a result
// below the smallest normal (2^-14) is flushed to a signed zero. Subnormal inputs are also
// read as zero (flush-to-zero). Any NaN result is the canonical quiet NaN 16'h7E00.
// The use of FP16 follows the PIM designs described; rounding mode, flush-to-zero and the
// NaN encoding are this design's own choices.
// Lint note: the classification functions look only at the exponent and fraction bits, so
// the sign bit of their argument is reported as unused.
package fp16_pkg;

  localparam logic [15:0] FP16_QNAN = 16'h7E00;

  function automatic logic fp16_is_nan(input logic [15:0] x);
    return (x[14:10] == 5'h1F) && (x[9:0] != 10'd0);
  endfunction

  function automatic logic fp16_is_inf(input logic [15:0] x);
    return (x[14:10] == 5'h1F) && (x[9:0] == 10'd0);
  endfunction

  // zero or subnormal: read as zero
  function automatic logic fp16_is_zero(input logic [15:0] x);
    return x[14:10] == 5'd0;
  endfunction

  // Round an 11-bit significand (leading one at bit 10) with its guard and sticky bits
  // to nearest-even and pack it. exp is the biased exponent of the unrounded value.
  function automatic logic [15:0] fp16_round_pack(input logic sign, input int exp,
                                                  input logic [10:0] sig, input logic guard,
                                                  input logic sticky);
    logic [11:0] r;
    int          e;
    r = {1'b0, sig} + {11'd0, guard & (sticky | sig[0])};
    e = exp;
    if (r[11]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e >= 31) return {sign, 5'h1F, 10'd0};
    if (e <= 0)  return {sign, 15'd0};
    return {sign, 5'(e), r[9:0]};
  endfunction

  function automatic logic [15:0] fp16_mul(input logic [15:0] a, input logic [15:0] b);
    logic        s;
    logic [21:0] p;
    int          e;
    s = a[15] ^ b[15];
    if (fp16_is_nan(a) || fp16_is_nan(b)) return FP16_QNAN;
    if (fp16_is_inf(a) || fp16_is_inf(b)) begin
      if (fp16_is_zero(a) || fp16_is_zero(b)) return FP16_QNAN;
      return {s, 5'h1F, 10'd0};
    end
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 15'd0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) e = e + 1;
    else       p = p << 1;
    return fp16_round_pack(s, e, p[21:11], p[10], |p[9:0]);
  endfunction

  function automatic logic [15:0] fp16_add(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] big, sml;
    logic [43:0] mb, ms, sum, norm;
    int          d, lead, e;
    logic        s;
    if (fp16_is_nan(a) || fp16_is_nan(b)) return FP16_QNAN;
    if (fp16_is_inf(a) && fp16_is_inf(b)) return (a[15] == b[15]) ? a : FP16_QNAN;
    if (fp16_is_inf(a)) return a;
    if (fp16_is_inf(b)) return b;
    if (fp16_is_zero(a) && fp16_is_zero(b)) return {a[15] & b[15], 15'd0};
    if (fp16_is_zero(a)) return b;
    if (fp16_is_zero(b)) return a;
    // order by magnitude so the difference is never negative
    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    d  = int'(big[14:10]) - int'(sml[14:10]);  // 0..29: the 44-bit field holds it exactly
    mb = {1'b0, 1'b1, big[9:0], 32'd0};
    ms = {1'b0, 1'b1, sml[9:0], 32'd0} >> d;
    s  = big[15];
    sum = (big[15] == sml[15]) ? mb + ms : mb - ms;
    if (sum == 44'd0) return 16'h0000;
    lead = 0;
    for (int i = 0; i < 44; i++) if (sum[i]) lead = i;
    norm = sum << (43 - lead);
    e    = int'(big[14:10]) + lead - 42;
    return fp16_round_pack(s, e, norm[43:33], norm[32], |norm[31:0]);
  endfunction

endpackage
