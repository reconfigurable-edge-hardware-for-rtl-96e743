// tb_dense_layer: self-checking test of the Float32 dense layer at its default size
// (24 inputs, 32 outputs, reuse factor 4, ReLU) and of a small linear variant (12 -> 3,
// reuse factor 2, no activation).
//
// Random weights and biases are written through the parameter port, then random input vectors
// are streamed in back to back. The expected outputs are computed in double precision from the
// same binary32 values; a result passes if it lies within 1e-5 of the sum of the magnitudes of
// its terms (the rounding error bound of the Float32 chain). Timing checks: the first result
// appears REUSE cycles after its input was accepted, and while the output is always ready a
// new input is accepted exactly every REUSE cycles. Output back-pressure phases make the layer
// stall; the number of stalls is counted and must be non-zero.
module tb_dense_layer;
  import ids_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------------------------------
  // generic harness, instantiated twice
  // ---------------------------------------------------------------------------------------
  int done_a = 0, done_b = 0;

  dense_harness #(.N_IN(24), .N_OUT(32), .REUSE(4), .RELU(1'b1), .N_PKT(60)) h_a (
    .clk, .rst_n, .cycle, .done(done_a));
  dense_harness #(.N_IN(12), .N_OUT(3), .REUSE(2), .RELU(1'b0), .N_PKT(40)) h_b (
    .clk, .rst_n, .cycle, .done(done_b));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_a != 0 && done_b != 0);
    checks   = h_a.checks + h_b.checks;
    failures = failures + h_a.failures + h_b.failures;
    $display("stalls: %0d / %0d, relu zeros: %0d", h_a.stalls, h_b.stalls, h_a.zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
