// fp16_ref_pkg: reference FP16 arithmetic for the testbenches.
//
// Written independently of the RTL: values are converted to double precision, where the sum
// or product of two FP16 numbers is exact, and the double result is rounded back to FP16
// from its IEEE-754 double bit pattern (round to nearest even), then mapped to infinity above
// the FP16 range and to a signed zero below the smallest normal. Subnormal inputs read as
// zero and NaN results are 16'h7E00, the same conventions as the datapath.
package fp16_ref_pkg;

  function automatic real to_real(input logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] from_real(input real x, input logic zsign);
    logic [63:0] d;
    int          e;
    logic [11:0] m;
    logic        g, st;
    d = $realtobits(x);
    if (d[62:0] == 63'd0) return {zsign, 15'd0};
    e  = int'(d[62:52]) - 1023 + 15;
    m  = {2'b01, d[51:42]};
    g  = d[41];
    st = |d[40:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[11]) begin m = m >> 1; e = e + 1; end
    if (e >= 31) return {d[63], 5'h1F, 10'd0};
    if (e <= 0)  return {d[63], 15'd0};
    return {d[63], 5'(e), m[9:0]};
  endfunction

  function automatic logic isnan(input logic [15:0] h);
    return h[14:10] == 5'h1F && h[9:0] != 0;
  endfunction
  function automatic logic isinf(input logic [15:0] h);
    return h[14:10] == 5'h1F && h[9:0] == 0;
  endfunction
  function automatic logic iszero(input logic [15:0] h);
    return h[14:10] == 5'h00;
  endfunction

  function automatic logic [15:0] ref_add(input logic [15:0] a, input logic [15:0] b);
    if (isnan(a) || isnan(b)) return 16'h7E00;
    if (isinf(a) && isinf(b)) return (a[15] == b[15]) ? a : 16'h7E00;
    if (isinf(a)) return a;
    if (isinf(b)) return b;
    if (iszero(a) && iszero(b)) return {a[15] & b[15], 15'd0};
    if (iszero(a)) return b;
    if (iszero(b)) return a;
    return from_real(to_real(a) + to_real(b), 1'b0);
  endfunction

  function automatic logic [15:0] ref_mul(input logic [15:0] a, input logic [15:0] b);
    logic s;
    s = a[15] ^ b[15];
    if (isnan(a) || isnan(b)) return 16'h7E00;
    if ((isinf(a) && iszero(b)) || (isinf(b) && iszero(a))) return 16'h7E00;
    if (isinf(a) || isinf(b)) return {s, 5'h1F, 10'd0};
    if (iszero(a) || iszero(b)) return {s, 15'd0};
    return from_real(to_real(a) * to_real(b), s);
  endfunction

  // random FP16 with mostly moderate exponents and some special values
  function automatic logic [15:0] rand_h();
    logic [15:0] h;
    int          k;
    h = 16'($urandom);
    k = $urandom_range(0, 19);
    if (k == 0) h[14:10] = 5'h00;
    else if (k == 1) h[14:10] = 5'h1F;
    else if (k < 14) h[14:10] = 5'($urandom_range(8, 22));
    return h;
  endfunction

  // 256-bit word operation, op: 0 pass a, 1 a+b, 2 a*b, 3 c+a*b
  function automatic logic [255:0] ref_word(input int op, input logic [255:0] a,
                                            input logic [255:0] b, input logic [255:0] c);
    logic [255:0] y;
    for (int l = 0; l < 16; l++)
      case (op)
        1:       y[16*l +: 16] = ref_add(a[16*l +: 16], b[16*l +: 16]);
        2:       y[16*l +: 16] = ref_mul(a[16*l +: 16], b[16*l +: 16]);
        3:       y[16*l +: 16] = ref_add(c[16*l +: 16], ref_mul(a[16*l +: 16], b[16*l +: 16]));
        default: y[16*l +: 16] = a[16*l +: 16];
      endcase
    return y;
  endfunction

  function automatic logic [255:0] rand_word();
    logic [255:0] w;
    for (int l = 0; l < 16; l++) w[16*l +: 16] = rand_h();
    return w;
  endfunction

endpackage
