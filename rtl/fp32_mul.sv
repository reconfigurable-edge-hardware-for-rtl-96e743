// fp32_mul: combinational IEEE-754 binary32 multiplier.
//
// The 24-bit significands are multiplied into a 48-bit product, normalised by at most one
// place and rounded to nearest, ties to even. Exponents are added with the bias removed.
// Interface: a, b in; y = a*b out, no clock, the result is valid in the same cycle.
// Number handling is this design's choice: subnormal inputs are read as zero and results that
// would be subnormal are flushed to signed zero; overflow gives infinity; NaN in, or 0*inf,
// gives the canonical quiet NaN. The surrounding design only asks for Float32 arithmetic.
module fp32_mul
  import ids_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, round_up;
  logic [24:0] mant_r;
  logic signed [10:0] exp_s;

  always_comb begin
    sa = a[31];
    sb = b[31];
    ea = a[30:23];
    eb = b[30:23];
    sy = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 23'd0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 23'd0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != 23'd0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 23'd0);

    prod  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp_s = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
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
    round_up = guard && (sticky || mant[0]);
    mant_r   = {1'b0, mant} + 25'(round_up);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = FP32_QNAN;
    else if (a_inf || b_inf)                                       y = {sy, 31'h7F80_0000};
    else if (a_zero || b_zero)                                     y = {sy, 31'd0};
    else if (exp_s >= 11'sd255)                                    y = {sy, 31'h7F80_0000};
    else if (exp_s <= 11'sd0)                                      y = {sy, 31'd0};
    else                                                           y = {sy, exp_s[7:0], mant_r[22:0]};
  end

endmodule
