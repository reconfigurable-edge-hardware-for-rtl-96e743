// fp32_exp: combinational binary32 exponential, y = exp(x), used by the Softmax layer.
//
// exp(x) = 2^t with t = x*log2(e). x is first converted to a signed fixed-point number with
// 32 fraction bits (exact for |x| >= 2^-9, |x| < 256), multiplied by log2(e) held with 30
// fraction bits, and split into an integer part n = floor(t) and a fraction f in [0,1).
// 2^f = exp(f*ln2) is evaluated by a degree-9 Taylor polynomial in Horner form with 30-bit
// fixed-point coefficients c_k = round(ln2^k / k! * 2^30); its truncation error is below
// 1e-8. The result is packed as exponent n+127 and the 23 fraction bits of 2^f, rounded to
// nearest. Accuracy is within a few units in the last place over the range used.
// Interface: x in, y out, combinational. The algorithm is this design's own choice; the design
// it follows only states that the Softmax was adapted to Float32. Subnormal results are
// flushed to zero, overflow gives infinity, NaN gives NaN.
module fp32_exp
  import ids_pkg::*;
(
  input  fp32_t x,
  output fp32_t y
);

  localparam logic [31:0] LOG2E = 32'd1549082005;   // round(log2(e) * 2^30)
  localparam logic [31:0] C [10] = '{
    32'd1073741824, 32'd744261118, 32'd257941248, 32'd59597083, 32'd10327387,
    32'd1431680,    32'd165394,    32'd16377,     32'd1419,     32'd109
  };

  logic [7:0]          ex;
  logic [39:0]         mag;       // |x| in Q8.32
  logic signed [41:0]  xf;
  logic signed [73:0]  prod;
  logic signed [43:0]  t;         // x*log2(e) in Q.32
  logic signed [11:0]  n;
  logic [31:0]         f;
  logic [31:0]         p;
  logic [63:0]         pf;
  logic [22:0]         mant;
  logic                round_up;
  logic [23:0]         mant_r;
  logic signed [11:0]  exp_s;

  always_comb begin
    ex  = x[30:23];
    mag = 40'd0;
    if (ex >= 8'd118)
      mag = 40'({1'b1, x[22:0]}) << (ex - 8'd118);
    else if (ex > 8'd78)
      mag = 40'({1'b1, x[22:0]}) >> (8'd118 - ex);
    xf   = x[31] ? -42'(signed'({2'b00, mag})) : 42'(signed'({2'b00, mag}));
    prod = 74'(xf) * 74'(signed'({42'd0, LOG2E}));
    t    = 44'(prod >>> 30);
    n    = 12'(t >>> 32);
    f    = t[31:0];

    p = C[9];
    for (int k = 8; k >= 0; k--) begin
      pf = 64'(p) * 64'(f);
      p  = C[k] + pf[63:32];
    end

    exp_s = n + 12'sd127;
    if (p[31]) begin                    // 2^f rounded up to 2.0
      mant     = 23'd0;
      round_up = 1'b0;
      exp_s    = exp_s + 12'sd1;
    end else begin
      mant     = p[29:7];
      round_up = p[6] && ((|p[5:0]) || p[7]);
    end
    mant_r = {1'b0, mant} + 24'(round_up);
    if (mant_r[23]) exp_s = exp_s + 12'sd1;

    if (ex == 8'hFF && x[22:0] != 23'd0) y = FP32_QNAN;
    else if (ex == 8'd0)                 y = FP32_ONE;
    else if (ex >= 8'd135)               y = x[31] ? FP32_ZERO : FP32_POS_INF;
    else if (exp_s >= 12'sd255)          y = FP32_POS_INF;
    else if (exp_s <= 12'sd0)            y = FP32_ZERO;
    else                                 y = {1'b0, exp_s[7:0], mant_r[22:0]};
  end

endmodule
