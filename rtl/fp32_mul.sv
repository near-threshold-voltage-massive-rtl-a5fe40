// fp32_mul: combinational IEEE-754 binary32 multiplier.
//
// Used by the matrix engine for the products of a matrix multiplication.
// The two 24-bit significands (hidden one restored) are multiplied into a
// 48-bit product, normalised by at most one position, and rounded to nearest,
// ties to even, using a guard bit and a sticky bit. The result exponent is
// checked after rounding: overflow gives a signed infinity, a result below the
// smallest normal number is flushed to a signed zero.
//
// Design choices (the accelerator is only said to compute in floating point):
//   * subnormal inputs are read as zero and subnormal results flushed to zero;
//   * any NaN input, or infinity times zero, gives the quiet NaN 0x7FC00000;
//   * no exception flags.
// Interface: a, b in; p = a*b out, purely combinational (zero cycles).
module fp32_mul
  import mxu_pkg::fp32_t, mxu_pkg::FP32_QNAN;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t p
);

  logic        sa, sb, sp;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, round_up;
  logic [24:0] mant_r;
  logic signed [10:0] exp_pre, exp_r;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sp     = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == '0);
    b_inf  = (eb == 8'hFF) && (fb == '0);
    a_nan  = (ea == 8'hFF) && (fa != '0);
    b_nan  = (eb == 8'hFF) && (fb != '0);

    prod    = {1'b1, fa} * {1'b1, fb};
    exp_pre = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
    if (prod[47]) begin
      mant    = prod[47:24];
      guard   = prod[23];
      sticky  = |prod[22:0];
      exp_pre = exp_pre + 11'sd1;
    end else begin
      mant    = prod[46:23];
      guard   = prod[22];
      sticky  = |prod[21:0];
    end
    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + 25'(round_up);
    exp_r    = exp_pre;
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_pre + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      p = FP32_QNAN;
    end else if (a_inf || b_inf) begin
      p = {sp, 8'hFF, 23'd0};
    end else if (a_zero || b_zero) begin
      p = {sp, 31'd0};
    end else if (exp_r >= 11'sd255) begin
      p = {sp, 8'hFF, 23'd0};
    end else if (exp_r <= 11'sd0) begin
      p = {sp, 31'd0};
    end else begin
      p = {sp, exp_r[7:0], mant_r[22:0]};
    end
  end

endmodule
