// fp32_add: combinational IEEE-754 binary32 adder.
//
// The operand of larger magnitude is taken as the base; the other significand is shifted right
// by the exponent difference, keeping guard, round and sticky bits. Same signs add (with a
// possible one-place right normalisation), different signs subtract (with a left
// normalisation by the leading-zero count). The result is rounded to nearest, ties to even.
// Interface: a, b in; y = a+b out, combinational.
// Number handling is this design's choice: subnormals are read as zero and flushed to zero on
// output, an exact zero difference is +0, overflow gives infinity, NaN or inf-inf gives the
// canonical quiet NaN.
module fp32_add
  import ids_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  fp32_t       op_big, op_sml;
  logic [7:0]  eb_, es_;
  logic [7:0]  d;
  logic [26:0] mb, ms, ms_sh;   // 1.23 significand + guard, round, sticky
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic        found;
  logic signed [9:0] exp_s;
  logic        sy, round_up;
  logic [24:0] mant_r;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == 23'd0);
    b_inf  = (b[30:23] == 8'hFF) && (b[22:0] == 23'd0);
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != 23'd0);
    b_nan  = (b[30:23] == 8'hFF) && (b[22:0] != 23'd0);

    if (a[30:0] >= b[30:0]) begin op_big = a; op_sml = b; end
    else                    begin op_big = b; op_sml = a; end
    eb_ = op_big[30:23];
    es_ = op_sml[30:23];
    sy  = op_big[31];
    mb  = {1'b1, op_big[22:0], 3'b000};
    ms  = (es_ == 8'd0) ? 27'd0 : {1'b1, op_sml[22:0], 3'b000};
    d   = eb_ - es_;

    if (d >= 8'd27) ms_sh = {26'd0, |ms};
    else            ms_sh = (ms >> d) | 27'(|(ms & ((27'd1 << d) - 27'd1)));

    exp_s = 10'(signed'({2'b00, eb_}));
    norm  = 27'd0;
    lz    = 5'd0;
    found = 1'b0;
    if (op_big[31] == op_sml[31]) begin
      sum = {1'b0, mb} + {1'b0, ms_sh};
      if (sum[27]) begin
        norm  = sum[27:1] | 27'(sum[0]);
        exp_s = exp_s + 10'sd1;
      end else begin
        norm  = sum[26:0];
      end
    end else begin
      sum = {1'b0, mb} - {1'b0, ms_sh};
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz    = 5'(26 - i);
        end
      end
      norm  = sum[26:0] << lz;
      exp_s = exp_s - 10'(lz);
    end

    round_up = norm[2] && (norm[1] || norm[0] || norm[3]);
    mant_r   = {1'b0, norm[26:3]} + 25'(round_up);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 10'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31]))) y = FP32_QNAN;
    else if (a_inf)                      y = a;
    else if (b_inf)                      y = b;
    else if (a_zero && b_zero)           y = {a[31] & b[31], 31'd0};
    else if (a_zero)                     y = b;
    else if (b_zero)                     y = a;
    else if (sum[26:0] == 27'd0 && !sum[27]) y = FP32_ZERO;
    else if (exp_s >= 10'sd255)          y = {sy, 31'h7F80_0000};
    else if (exp_s <= 10'sd0)            y = {sy, 31'd0};
    else                                 y = {sy, exp_s[7:0], mant_r[22:0]};
  end

endmodule
