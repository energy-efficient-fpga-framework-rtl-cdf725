// fp32_add: combinational IEEE-754 single-precision adder.
//
// Computes y = a + b with round-to-nearest-even. The operands are swapped so
// that x has the larger magnitude; the smaller significand is aligned to it in
// a 51-bit working field (26 bits below the significand), and every bit shifted
// out beyond that field is ORed into the least significant bit as a sticky bit.
// After the add or subtract, a leading-one search normalises the sum, which is
// then rounded on guard and sticky bits. Subnormals are read as zero and
// subnormal results are flushed to a signed zero; an exact cancellation gives
// +0; inf - inf and NaN inputs give the quiet NaN 0x7FC00000.
//
// Interface: a, b, y are FP32 bit patterns; purely combinational. FP32
// arithmetic follows the design; flush-to-zero and the NaN pattern are choices
// of this implementation.
module fp32_add
  import ce_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  fp32_t fa, fb, fx, fy;
  logic  a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [7:0]  d;
  logic [49:0] x_ext, y_ext, y_sh;
  logic        lost;
  logic [50:0] r, n;
  int          p;
  logic [23:0] mant;
  logic [24:0] mant_r;
  logic        guard, sticky;
  logic signed [10:0] exp_s;

  always_comb begin
    fa = fp32_t'(a);
    fb = fp32_t'(b);
    a_zero = (fa.exp == 8'd0);
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hFF) && (fa.frac == '0);
    b_inf  = (fb.exp == 8'hFF) && (fb.frac == '0);
    a_nan  = (fa.exp == 8'hFF) && (fa.frac != '0);
    b_nan  = (fb.exp == 8'hFF) && (fb.frac != '0);

    // Order by magnitude.
    if ({fa.exp, fa.frac} >= {fb.exp, fb.frac}) begin
      fx = fa; fy = fb;
    end else begin
      fx = fb; fy = fa;
    end
    d     = fx.exp - fy.exp;
    x_ext = {1'b1, fx.frac, 26'd0};
    y_ext = {1'b1, fy.frac, 26'd0};
    if (d >= 8'd50) begin
      y_sh = '0;
      lost = 1'b1;
    end else begin
      y_sh = y_ext >> d;
      lost = (y_ext & ((50'd1 << d) - 50'd1)) != '0;
    end
    y_sh[0] = y_sh[0] | lost;

    if (fx.sign ^ fy.sign) r = {1'b0, x_ext} - {1'b0, y_sh};
    else                   r = {1'b0, x_ext} + {1'b0, y_sh};

    // Leading-one position.
    p = 0;
    for (int i = 0; i < 51; i++) begin
      if (r[i]) p = i;
    end
    n      = r << (50 - p);
    mant   = n[50:27];
    guard  = n[26];
    sticky = |n[25:0];
    exp_s  = $signed({3'b000, fx.exp}) + 11'(p) - 11'sd49;
    mant_r = {1'b0, mant} + 25'(guard && (sticky || mant[0]));
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (fa.sign != fb.sign))) begin
      y = FP32_QNAN;
    end else if (a_inf) begin
      y = {fa.sign, 8'hFF, 23'd0};
    end else if (b_inf) begin
      y = {fb.sign, 8'hFF, 23'd0};
    end else if (a_zero && b_zero) begin
      y = {fa.sign & fb.sign, 31'd0};
    end else if (a_zero) begin
      y = b;
    end else if (b_zero) begin
      y = a;
    end else if (r == '0) begin
      y = 32'd0;                         // exact cancellation
    end else if (exp_s >= 11'sd255) begin
      y = {fx.sign, 8'hFF, 23'd0};
    end else if (exp_s <= 11'sd0) begin
      y = {fx.sign, 31'd0};
    end else begin
      y = {fx.sign, exp_s[7:0], mant_r[22:0]};
    end
  end

endmodule
