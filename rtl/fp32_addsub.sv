// fp32_addsub: combinational IEEE-754 binary32 adder / subtractor.
//
// Used by the matrix engine both to accumulate dot products and for the
// element-wise matrix addition and subtraction. For sub = 1 the sign of b is
// inverted and the two operands are added. The operand of larger magnitude is
// kept as is; the smaller one is aligned to it by a right shift that collects
// the shifted-out bits into guard, round and sticky bits (27-bit working
// significand). After the add or subtract the result is normalised (one
// position right on a carry, or left by its leading-zero count after
// cancellation) and rounded to nearest, ties to even.
//
// Design choices (the accelerator is only said to compute in floating point):
//   * subnormal inputs are read as zero, subnormal results flushed to zero;
//   * an exactly cancelling difference gives +0, -0 + -0 gives -0;
//   * any NaN input, or inf - inf, gives the quiet NaN 0x7FC00000;
//   * no exception flags.
// Interface: a, b, sub in; s = a + b (sub = 0) or a - b (sub = 1), purely
// combinational (zero cycles).
module fp32_addsub
  import mxu_pkg::fp32_t, mxu_pkg::FP32_QNAN, mxu_pkg::FP32_POS_ZERO;
(
  input  fp32_t a,
  input  fp32_t b,
  input  logic  sub,
  output fp32_t s
);

  // Number of leading zeros of a 27-bit value (27 when it is zero).
  function automatic logic [4:0] lzc27(input logic [26:0] v);
    logic [4:0] n;
    logic       found;
    n     = 5'd27;
    found = 1'b0;
    for (int i = 26; i >= 0; i--) begin
      if (!found && v[i]) begin
        n     = 5'(26 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

  logic        sa, sb;
  logic [7:0]  ea, eb, e_big, e_small;
  logic [22:0] fa, fb, f_big, f_small;
  logic        s_big, s_small;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic        a_is_big, eff_sub;
  logic [7:0]  d;
  logic [49:0] wide, wide_sh;
  logic [26:0] big27, small27;
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic [23:0] mant;
  logic        round_up;
  logic [24:0] mant_r;
  logic signed [9:0] exp_n;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sb     = sb ^ sub;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == '0);
    b_inf  = (eb == 8'hFF) && (fb == '0);
    a_nan  = (ea == 8'hFF) && (fa != '0);
    b_nan  = (eb == 8'hFF) && (fb != '0);

    // Order the operands by magnitude.
    a_is_big = {ea, fa} >= {eb, fb};
    if (a_is_big) begin
      s_big = sa; e_big = ea; f_big = fa; s_small = sb; e_small = eb; f_small = fb;
    end else begin
      s_big = sb; e_big = eb; f_big = fb; s_small = sa; e_small = ea; f_small = fa;
    end
    eff_sub = s_big ^ s_small;
    d       = e_big - e_small;

    // Align the smaller significand; its lowest bit becomes the sticky bit.
    wide    = {1'b1, f_small, 26'd0};
    wide_sh = (d >= 8'd50) ? 50'd0 : (wide >> d);
    small27 = {wide_sh[49:24], (|wide_sh[23:0]) | (d >= 8'd50)};
    big27   = {1'b1, f_big, 3'b000};

    sum = eff_sub ? ({1'b0, big27} - {1'b0, small27})
                  : ({1'b0, big27} + {1'b0, small27});

    // Normalise.
    lz    = 5'd0;
    exp_n = 10'(signed'({2'b00, e_big}));
    if (sum[27]) begin
      norm  = {sum[27:2], sum[1] | sum[0]};
      exp_n = exp_n + 10'sd1;
    end else begin
      lz    = lzc27(sum[26:0]);
      norm  = sum[26:0] << lz;
      exp_n = exp_n - 10'(signed'({5'd0, lz}));
    end

    // Round to nearest, ties to even.
    mant     = norm[26:3];
    round_up = norm[2] & (norm[1] | norm[0] | mant[0]);
    mant_r   = {1'b0, mant} + 25'(round_up);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_n  = exp_n + 10'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      s = FP32_QNAN;
    end else if (a_inf) begin
      s = {sa, 8'hFF, 23'd0};
    end else if (b_inf) begin
      s = {sb, 8'hFF, 23'd0};
    end else if (a_zero && b_zero) begin
      s = {sa & sb, 31'd0};
    end else if (b_zero) begin
      s = {sa, ea, fa};
    end else if (a_zero) begin
      s = {sb, eb, fb};
    end else if (sum == '0) begin
      s = FP32_POS_ZERO;
    end else if (exp_n >= 10'sd255) begin
      s = {s_big, 8'hFF, 23'd0};
    end else if (exp_n <= 10'sd0) begin
      s = {s_big, 31'd0};
    end else begin
      s = {s_big, exp_n[7:0], mant_r[22:0]};
    end
  end

endmodule
