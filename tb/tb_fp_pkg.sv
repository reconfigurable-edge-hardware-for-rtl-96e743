// tb_fp_pkg: reference helpers for the testbenches, independent of the design's arithmetic.
//
// Values are converted between binary32 bit patterns and the simulator's double-precision
// real type through the IEEE-754 double layout ($realtobits / $bitstoreal), so expected results
// are computed in double precision and rounded to binary32 here. The rounding follows the
// design's number handling: round to nearest even, subnormal results flushed to zero,
// overflow to infinity.
package tb_fp_pkg;

  // binary32 bits -> real (subnormals read as zero, like the design)
  function automatic real fp2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // real -> binary32 bits, round to nearest even, flush to zero, overflow to infinity
  function automatic logic [31:0] r2fp(real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, s;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g = d[28];
    s = |d[27:0];
    if (g && (s || m[0])) m = m + 24'd1;
    if (m[23]) begin m = 24'd0; e = e + 1; end
    if (e >= 255) return {d[63], 31'h7F80_0000};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // distance in units of the last place between two binary32 values of equal sign
  function automatic int unsigned ulp_diff(logic [31:0] a, logic [31:0] b);
    if (a[30:0] == 31'd0 && b[30:0] == 31'd0) return 0;
    if (a[31] != b[31]) return 32'hFFFF_FFFF;
    return (a[30:0] > b[30:0]) ? 32'(a[30:0] - b[30:0]) : 32'(b[30:0] - a[30:0]);
  endfunction

  // random normal binary32 with biased exponent in [emin, emax]
  function automatic logic [31:0] rand_fp(int emin, int emax, logic allow_neg);
    logic [7:0] e;
    e = 8'(emin + int'($urandom_range(emax - emin)));
    return {allow_neg & 1'($urandom), e, 23'($urandom)};
  endfunction

  // random real uniform in [lo, hi]
  function automatic real rand_real(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967295.0);
  endfunction

endpackage
