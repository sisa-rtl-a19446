// bf16_mul: combinational bfloat16 x bfloat16 multiplier with a binary32 result.
//
// The 8-bit significands give an exact 16-bit product, which always fits the
// 24-bit binary32 significand, so no rounding is needed unless the exponent
// leaves the binary32 range: overflow gives infinity, results below the
// smallest normal are flushed to signed zero, as are subnormal inputs.
// NaN inputs and 0 x inf give the quiet NaN. Purely combinational.
// BF16 operands follow the reference design; the binary32 product and
// flush-to-zero are choices of this design.
module bf16_mul
  import sisa_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output fp32_t y
);

  logic        s;
  logic [7:0]  ea, eb;
  logic [15:0] p;
  logic signed [10:0] e;
  logic [22:0] frac;
  logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    s  = a[15] ^ b[15];
    ea = a[14:7];
    eb = b[14:7];
    a_nan  = (ea == 8'hff) && (a[6:0] != '0);
    b_nan  = (eb == 8'hff) && (b[6:0] != '0);
    a_inf  = (ea == 8'hff) && (a[6:0] == '0);
    b_inf  = (eb == 8'hff) && (b[6:0] == '0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    p = {8'd0, 1'b1, a[6:0]} * {8'd0, 1'b1, b[6:0]};
    e = 11'(signed'({3'd0, ea})) + 11'(signed'({3'd0, eb})) - 11'sd127;
    if (p[15]) begin
      frac = {p[14:0], 8'd0};
      e    = e + 11'sd1;
    end else begin
      frac = {p[13:0], 9'd0};
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = FP32_QNAN;
    else if (a_inf || b_inf)  y = {s, 8'hff, 23'd0};
    else if (a_zero || b_zero) y = {s, 31'd0};
    else if (e >= 11'sd255)   y = {s, 8'hff, 23'd0};
    else if (e <= 11'sd0)     y = {s, 31'd0};
    else                      y = {s, e[7:0], frac};
  end

endmodule
