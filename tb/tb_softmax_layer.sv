// tb_softmax_layer: self-checking test of the fully unrolled Float32 Softmax for N = 7 and
// N = 2.
//
// Random logit vectors (spread of +-10, plus some with a spread of +-60 so that small
// exponentials underflow to zero, and ties) are streamed in; every output must lie within a
// relative 2e-6 + 1.2e-7*(max - x_i) (the cost of rounding x_i - max to Float32) of exp(x_i - max) / sum_j exp(x_j - max) computed in double
// precision. Timing checks: the result is valid one cycle after its input was accepted, and a
// new vector is accepted every cycle while the output is ready. A held-back output must stay
// valid and unchanged (back-pressure phase).
module tb_softmax_layer;
  import ids_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 7;
  localparam int N_VEC = 400;

  logic  clk = 1'b0, rst_n = 1'b0;
  int    checks = 0, failures = 0, cycle = 0, holds = 0;
  logic  in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  fp32_t in_data [N];
  fp32_t out_data [N];
  // N = 2 instance, fed with the first two logits of the same vectors
  logic  in_ready2, out_valid2;
  fp32_t out_data2 [2];
  fp32_t in_data2 [2];

  softmax_layer #(.N(N)) dut (.*);
  softmax_layer #(.N(2)) dut2 (.clk, .rst_n, .in_valid(in_valid && in_ready), .in_ready(in_ready2),
                               .in_data(in_data2), .out_valid(out_valid2), .out_ready(out_ready),
                               .out_data(out_data2));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endfunction

  real xs [N_VEC][N];
  int  acc_cycle [N_VEC];
  int  n_in = 0, n_out = 0;

  function automatic void check_vec(int vi, int n, fp32_t got_v [], string tag);
    real mx, s, ref_v, got, tot, tol;
    mx = xs[vi][0];
    for (int i = 1; i < n; i++) if (xs[vi][i] > mx) mx = xs[vi][i];
    s = 0.0;
    for (int i = 0; i < n; i++) s += $exp(xs[vi][i] - mx);
    tot = 0.0;
    for (int i = 0; i < n; i++) begin
      ref_v = $exp(xs[vi][i] - mx) / s;
      got   = fp2r(got_v[i]);
      tot  += got;
      // Float32 rounding of x_i - max alone costs |x_i - max| * 2^-24 relative
      tol   = (2e-6 + 1.2e-7 * (mx - xs[vi][i])) * ref_v + 1e-37;
      chk((got - ref_v <= tol) && (ref_v - got <= tol),
          $sformatf("%s vec %0d out %0d: got %g expected %g", tag, vi, i, got, ref_v));
    end
    chk(tot > 1.0 - 1e-5 && tot < 1.0 + 1e-5, $sformatf("%s vec %0d sums to %g", tag, vi, tot));
  endfunction

  initial begin
    for (int v = 0; v < N_VEC; v++)
      for (int i = 0; i < N; i++) begin
        xs[v][i] = fp2r(r2fp((v % 5 == 4) ? rand_real(-60.0, 60.0) : rand_real(-10.0, 10.0)));
        if (v % 17 == 3 && i > 0) xs[v][i] = xs[v][0];         // ties
      end
    for (int i = 0; i < N; i++) in_data[i] = '0;
    in_data2 = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (n_in < N_VEC) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) in_data[i] = r2fp(xs[n_in][i]);
      for (int i = 0; i < 2; i++) in_data2[i] = r2fp(xs[n_in][i]);
      in_valid = 1'b1;
      #1;
      if (in_ready) begin
        acc_cycle[n_in] = cycle;
        if (n_in > 0 && n_in < N_VEC / 2)
          chk(acc_cycle[n_in] - acc_cycle[n_in-1] == 1, "one vector per cycle");
        n_in++;
      end
    end
    @(negedge clk) in_valid = 1'b0;
    wait (n_out == N_VEC);
    $display("held outputs: %0d", holds);
    chk(holds > 0, "back-pressure phase never held an output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp32_t prev [N];
  bit    was_held = 1'b0;

  always @(negedge clk) begin
    out_ready = (n_in < N_VEC / 2) ? 1'b1 : 1'($urandom_range(2) == 0);
    #1;
    if (rst_n && out_valid) begin
      if (was_held) chk(out_data == prev, "held output changed");
      if (n_out < N_VEC / 2 && !was_held)
        chk(cycle - acc_cycle[n_out] == 1, $sformatf("latency %0d", cycle - acc_cycle[n_out]));
      if (out_ready) begin
        check_vec(n_out, N, out_data, "N=7");
        chk(out_valid2, "N=2 instance out of step");
        check_vec(n_out, 2, out_data2, "N=2");
        n_out++;
        was_held = 1'b0;
      end else begin
        holds++;
        was_held = 1'b1;
        prev = out_data;
      end
    end
  end

endmodule
