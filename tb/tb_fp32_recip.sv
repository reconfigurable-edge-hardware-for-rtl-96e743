// tb_fp32_recip: self-checking test of the binary32 reciprocal.
//
// Random operands over a wide exponent range, powers of two, zero and infinity. The reference
// is 1.0/x in double precision rounded to binary32; the design must match it bit for bit
// (double rounding cannot differ here because the double quotient carries 29 extra bits and
// the binary32 quotient of two binary32 values is never a rounding tie).
module tb_fp32_recip;
  import tb_fp_pkg::*;

  logic        clk = 1'b0;
  logic [31:0] x, y, expected;
  int          checks = 0, failures = 0, cycles = 0;

  fp32_recip dut (.x(x), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < 100000) @(posedge clk) cycles++;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] tx, logic [31:0] texp);
    x = tx;
    @(posedge clk);
    checks++;
    if (y != texp && ulp_diff(y, texp) != 0) begin
      failures++;
      if (failures < 10) $display("FAIL 1/%h = %h, expected %h", tx, y, texp);
    end
  endtask

  initial begin
    logic [31:0] tx;
    check(32'h3F80_0000, 32'h3F80_0000);   // 1 -> 1
    check(32'h4000_0000, 32'h3F00_0000);   // 2 -> 0.5
    check(32'hC080_0000, 32'hBE80_0000);   // -4 -> -0.25
    check(32'h4040_0000, r2fp(1.0 / 3.0));
    check(32'h0000_0000, 32'h7F80_0000);   // 1/0 -> inf
    check(32'h7F80_0000, 32'h0000_0000);   // 1/inf -> 0
    check(32'h7F7F_FFFF, 32'h0000_0000);   // result below normal range -> 0
    for (int i = 0; i < 20000; i++) begin
      tx = rand_fp(2, 252, 1'b1);
      if (i % 10 == 0) tx[22:0] = 23'd0;
      check(tx, r2fp(1.0 / fp2r(tx)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
