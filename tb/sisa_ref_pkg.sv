// sisa_ref_pkg: reference arithmetic for the testbenches.
//
// Computes bfloat16 products and binary32 sums with the host's double
// precision arithmetic, then rounds the exact double result to binary32 by
// hand (round to nearest even, flush of results below the smallest normal,
// infinity on overflow). A sum or product of two binary32 values is exact or
// correctly rounded in double, so a second rounding to binary32 gives the
// correctly rounded binary32 result. This is independent of the RTL adder,
// which works on integer significands with guard, round and sticky bits.
package sisa_ref_pkg;

  function automatic bit is_zero32(logic [31:0] x);
    return x[30:23] == 8'd0;
  endfunction

  function automatic real fp32_to_real(logic [31:0] x);
    logic [63:0] d;
    if (x[30:23] == 8'd0) return 0.0;
    d = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real_to_fp32(real r);
    logic [63:0] d;
    int          fe;
    logic [23:0] mant;
    logic        g, st;
    d = $realtobits(r);
    if (r == 0.0) return {d[63], 31'd0};
    fe   = int'(d[62:52]) - 1023 + 127;
    if (fe <= 0) return {d[63], 31'd0};
    mant = {1'b0, d[51:29]};
    g    = d[28];
    st   = |d[27:0];
    if (g && (st || mant[0])) mant = mant + 24'd1;
    if (mant[23]) begin
      mant = 24'd0;
      fe   = fe + 1;
    end
    if (fe >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(fe), mant[22:0]};
  endfunction

  function automatic logic [31:0] add_ref(logic [31:0] a, logic [31:0] b);
    real r;
    bit an = (a[30:23] == 8'hff) && (a[22:0] != 0);
    bit bn = (b[30:23] == 8'hff) && (b[22:0] != 0);
    bit a_inf = (a[30:23] == 8'hff) && (a[22:0] == 0);
    bit b_inf = (b[30:23] == 8'hff) && (b[22:0] == 0);
    if (an || bn || (a_inf && b_inf && a[31] != b[31])) return 32'h7fc0_0000;
    if (a_inf) return a;
    if (b_inf) return b;
    if (is_zero32(a) && is_zero32(b)) return {a[31] & b[31], 31'd0};
    if (is_zero32(a)) return b;
    if (is_zero32(b)) return a;
    r = fp32_to_real(a) + fp32_to_real(b);
    if (r == 0.0) return 32'd0;
    return real_to_fp32(r);
  endfunction

  function automatic logic [31:0] mul_ref(logic [15:0] a, logic [15:0] b);
    logic [31:0] x = {a, 16'd0};
    logic [31:0] y = {b, 16'd0};
    bit s  = a[15] ^ b[15];
    bit an = (x[30:23] == 8'hff) && (x[22:0] != 0);
    bit bn = (y[30:23] == 8'hff) && (y[22:0] != 0);
    bit a_inf = (x[30:23] == 8'hff) && (x[22:0] == 0);
    bit b_inf = (y[30:23] == 8'hff) && (y[22:0] == 0);
    if (an || bn || (a_inf && is_zero32(y)) || (b_inf && is_zero32(x))) return 32'h7fc0_0000;
    if (a_inf || b_inf) return {s, 8'hff, 23'd0};
    if (is_zero32(x) || is_zero32(y)) return {s, 31'd0};
    return real_to_fp32(fp32_to_real(x) * fp32_to_real(y));
  endfunction

  // Random bfloat16 with exponent in [127-spread, 127+spread], either sign.
  function automatic logic [15:0] rand_bf16(int spread);
    int e = 127 - spread + int'($urandom_range(2 * spread, 0));
    return {1'($urandom), 8'(e), 7'($urandom)};
  endfunction

endpackage
