// tb_fp32_add: self-checking test of the binary32 adder.
//
// Random normal operands (exponents 110..150, so overflow and flush-to-zero cases occur)
// and a list of special operands are applied one per clock. The expected result is the exact
// double-precision result rounded to binary32 by the reference package; the design must match
// it bit for bit.
module tb_fp32_add;
  import tb_fp_pkg::*;

  logic        clk = 1'b0;
  logic [31:0] a, b, y, exp_y;
  int          checks = 0, failures = 0, cycles = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < 100000) @(posedge clk) cycles++;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] ta, logic [31:0] tb, logic [31:0] expected);
    a = ta; b = tb;
    @(posedge clk);
    checks++;
    if (ulp_diff(y, expected) > 0) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", ta, tb, y, expected);
    end
  endtask

  initial begin
    logic [31:0] ta, tb;
    // special values
    check(32'h3F80_0000, 32'h4000_0000, r2fp(fp2r(32'h3F80_0000) + fp2r(32'h4000_0000)));
    check(32'h0000_0000, 32'h4040_0000, r2fp(fp2r(32'h0000_0000) + fp2r(32'h4040_0000)));
    check(32'hBF80_0000, 32'h3F80_0000, r2fp(fp2r(32'hBF80_0000) + fp2r(32'h3F80_0000)));
    check(32'h3FFF_FFFF, 32'h3FFF_FFFF, r2fp(fp2r(32'h3FFF_FFFF) + fp2r(32'h3FFF_FFFF)));
    check(32'h4B80_0000, 32'h3F80_0001, r2fp(fp2r(32'h4B80_0000) + fp2r(32'h3F80_0001)));
    check(32'h7F00_0000, 32'h7F00_0000, 32'h7F80_0000);
    a = 32'h7F80_0000; b = 32'h3F80_0000; @(posedge clk); checks++;
    if (y != 32'h7F80_0000) begin failures++; $display("FAIL inf case %h", y); end
    for (int i = 0; i < 20000; i++) begin
      ta = rand_fp(110, 150, 1'b1);
      tb = (i % 4 == 0) ? {~ta[31], ta[30:23], 23'($urandom)} : rand_fp(110, 150, 1'b1);
      if (i % 8 == 1) tb = {1'($urandom), 8'(int'(ta[30:23]) - int'($urandom_range(3))), 23'($urandom)};
      check(ta, tb, r2fp(fp2r(ta) + fp2r(tb)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
