// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Computes y = a * b with round-to-nearest-even. The 24x24-bit significand
// product is normalised by at most one position, then rounded with a guard bit
// and a sticky bit. Subnormal inputs are read as zero and results that would be
// subnormal are flushed to a signed zero, which is what FPGA floating-point
// operators commonly do. Infinities propagate; NaN inputs and 0 * inf give the
// quiet NaN 0x7FC00000.
//
// Interface: a, b, y are FP32 bit patterns. No clock: the caller registers the
// result. The number format (FP32, no quantization) follows the design; the
// flush-to-zero and NaN encoding are choices of this implementation.
module fp32_mul
  import ce_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  fp32_t fa, fb;
  assign fa = fp32_t'(a);
  assign fb = fp32_t'(b);

  logic        sign;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic [23:0] mant;
  logic [24:0] mant_r;
  logic        guard, sticky;
  logic signed [10:0] exp_s;

  always_comb begin
    sign   = fa.sign ^ fb.sign;
    a_zero = (fa.exp == 8'd0);
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hFF) && (fa.frac == '0);
    b_inf  = (fb.exp == 8'hFF) && (fb.frac == '0);
    a_nan  = (fa.exp == 8'hFF) && (fa.frac != '0);
    b_nan  = (fb.exp == 8'hFF) && (fb.frac != '0);

    prod  = {1'b1, fa.frac} * {1'b1, fb.frac};
    exp_s = $signed({3'b000, fa.exp}) + $signed({3'b000, fb.exp}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_s  = exp_s + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    mant_r = {1'b0, mant} + 25'(guard && (sticky || mant[0]));
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = FP32_QNAN;
    end else if (a_inf || b_inf) begin
      y = {sign, 8'hFF, 23'd0};
    end else if (a_zero || b_zero) begin
      y = {sign, 31'd0};
    end else if (exp_s >= 11'sd255) begin
      y = {sign, 8'hFF, 23'd0};          // overflow to infinity
    end else if (exp_s <= 11'sd0) begin
      y = {sign, 31'd0};                 // underflow flushed to zero
    end else begin
      y = {sign, exp_s[7:0], mant_r[22:0]};
    end
  end

endmodule
