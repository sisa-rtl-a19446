// fp32_add: combinational IEEE-754 binary32 adder used by the PE accumulator.
//
// Operands are aligned with three extra bits (guard, round, sticky), added or
// subtracted, normalised and rounded to nearest-even. Subnormal inputs and
// results are flushed to signed zero; overflow gives infinity; NaN inputs and
// inf - inf give the quiet NaN 0x7fc00000. +0 + -0 gives +0.
// Purely combinational: y is valid in the same cycle as a and b.
// The number format is IEEE-754; flush-to-zero is a choice of this design.
module fp32_add
  import sisa_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sx, sy, sr;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] ma, mb, mx, my;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [7:0]  d;
  logic [27:0] xa, xb, sum;
  logic [4:0]  lz;
  logic signed [9:0] er;
  logic [27:0] nrm;
  logic [24:0] rnd;
  logic        lsb, g, rs;

  always_comb begin
    sa = a[31]; ea = a[30:23]; ma = {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = {1'b1, b[22:0]};
    a_nan  = (ea == 8'hff) && (a[22:0] != '0);
    b_nan  = (eb == 8'hff) && (b[22:0] != '0);
    a_inf  = (ea == 8'hff) && (a[22:0] == '0);
    b_inf  = (eb == 8'hff) && (b[22:0] == '0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);

    // order by magnitude: x is the larger operand
    if ({ea, a[22:0]} >= {eb, b[22:0]}) begin
      sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
    end

    d  = ex - ey;
    xa = {1'b0, mx, 3'b000};
    xb = {1'b0, my, 3'b000};
    if (d >= 8'd27) begin
      xb = 28'd1;  // only the sticky bit survives
    end else if (d != 8'd0) begin
      xb = ({1'b0, my, 3'b000} >> d) | {27'd0, |({1'b0, my, 3'b000} & ((28'd1 << d) - 28'd1))};
    end

    sum = (sx == sy) ? (xa + xb) : (xa - xb);
    er  = {2'b00, ex};
    sr  = sx;

    // normalise
    lz = 5'd0;
    for (int i = 0; i <= 26; i++) begin
      if (sum[i]) lz = 5'(26 - i);  // highest set bit wins
    end
    if (sum[27]) begin
      nrm = {1'b0, sum[27:1]} | {27'd0, sum[0]};
      er  = er + 10'sd1;
    end else begin
      nrm = sum << lz;
      er  = er - 10'(signed'({5'd0, lz}));
    end

    // round to nearest even on bits [2:0]
    lsb = nrm[3];
    g   = nrm[2];
    rs  = |nrm[1:0];
    rnd = {1'b0, nrm[26:3]} + 25'((g && (rs || lsb)) ? 1 : 0);
    if (rnd[24]) begin
      rnd = rnd >> 1;
      er  = er + 10'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = FP32_QNAN;
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = b;
    end else if (a_zero && b_zero) begin
      y = {sa & sb, 31'd0};
    end else if (a_zero) begin
      y = b;
    end else if (b_zero) begin
      y = a;
    end else if (sum == 28'd0) begin
      y = 32'd0;
    end else if (er <= 10'sd0) begin
      y = {sr, 31'd0};
    end else if (er >= 10'sd255) begin
      y = {sr, 8'hff, 23'd0};
    end else begin
      y = {sr, er[7:0], rnd[22:0]};
    end
  end

endmodule
