// tb_fp32_exp: self-checking test of the binary32 exponential.
//
// Arguments cover the Softmax range (mostly x <= 0, down to beyond underflow) and some
// positive values up to overflow. The reference is $exp in double precision rounded to
// binary32; the design must be within 4 units in the last place.
module tb_fp32_exp;
  import tb_fp_pkg::*;

  logic        clk = 1'b0;
  logic [31:0] x, y, expected;
  int          checks = 0, failures = 0, cycles = 0;
  int unsigned worst = 0;

  fp32_exp dut (.x(x), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < 100000) @(posedge clk) cycles++;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] tx);
    x = tx;
    expected = r2fp($exp(fp2r(tx)));
    @(posedge clk);
    checks++;
    if (ulp_diff(y, expected) > worst && ulp_diff(y, expected) < 1000) worst = ulp_diff(y, expected);
    if (ulp_diff(y, expected) > 4) begin
      failures++;
      if (failures < 10) $display("FAIL exp(%h=%g) = %h, expected %h", tx, fp2r(tx), y, expected);
    end
  endtask

  initial begin
    check(32'h0000_0000);                 // exp(0) = 1
    check(32'hBF80_0000);                 // exp(-1)
    check(32'h3F80_0000);                 // exp(1)
    check(r2fp(-87.0));
    check(r2fp(-100.0));                  // underflow -> 0
    check(r2fp(89.0));                    // overflow -> inf
    check(r2fp(-300.0));
    for (int i = 0; i < 20000; i++) begin
      if (i % 2 == 0) check(r2fp(rand_real(-90.0, 0.0)));
      else if (i % 4 == 1) check(r2fp(rand_real(-1.0, 1.0)));
      else check(r2fp(rand_real(-20.0, 88.0)));
    end
    $display("worst ulp error %0d", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
