// fp32_recip: combinational binary32 reciprocal, y = 1/x, used to normalise the Softmax.
//
// The significand m (24 bits, hidden one included) divides 2^49; the 26-bit quotient
// carries the result significand plus a guard bit, and the remainder gives the sticky bit,
// so the result is correctly rounded to nearest even. For x = 2^k exactly the result is
// 2^-k. The exponent is 253 - e (or 254 - e for a power of two).
// Interface: x in, y out, combinational. The divider structure is this design's choice.
// Zero gives a signed infinity, infinity gives a signed zero, NaN gives NaN, and results
// that would be subnormal are flushed to zero.
module fp32_recip
  import ids_pkg::*;
(
  input  fp32_t x,
  output fp32_t y
);

  localparam logic [49:0] NUM = 50'd1 << 49;

  logic [7:0]   ex;
  logic [49:0]  den, q, r;
  logic         round_up;
  logic [23:0]  mant_r;
  logic signed [9:0] exp_s;

  always_comb begin
    ex  = x[30:23];
    den = 50'({1'b1, x[22:0]});
    q   = NUM / den;
    r   = NUM % den;
    round_up = q[1] && (q[0] || (r != 50'd0) || q[2]);
    mant_r   = {1'b0, q[24:2]} + 24'(round_up);
    exp_s    = 10'sd253 - 10'(signed'({2'b00, ex}));
    if (mant_r[23]) exp_s = exp_s + 10'sd1;

    if (ex == 8'hFF)                     y = (x[22:0] != 23'd0) ? FP32_QNAN : {x[31], 31'd0};
    else if (ex == 8'd0)                 y = {x[31], 31'h7F80_0000};
    else if (x[22:0] == 23'd0)           y = (ex == 8'd254) ? {x[31], 31'd0} : {x[31], 8'(8'd254 - ex), 23'd0};
    else if (exp_s <= 10'sd0)            y = {x[31], 31'd0};
    else                                 y = {x[31], exp_s[7:0], mant_r[22:0]};
  end

endmodule
