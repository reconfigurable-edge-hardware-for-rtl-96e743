// dense_harness: drives and checks one dense_layer instance for tb_dense_layer.
//
// Writes random parameters, streams N_PKT random input vectors, applies phases with the
// output always ready (for the latency and initiation-interval checks) and phases with
// random back-pressure (to force stalls), and compares every output with a double-precision
// reference. Results are left in checks/failures/stalls/zeros, and done is set at the end.
module dense_harness
  import ids_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter int unsigned N_IN  = 24,
  parameter int unsigned N_OUT = 32,
  parameter int unsigned REUSE = 4,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned N_PKT = 60
) (
  input  logic clk,
  input  logic rst_n,
  input  int   cycle,
  output int   done
);

  int    checks = 0, failures = 0, stalls = 0, zeros = 0;

  logic  in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  fp32_t in_data  [N_IN];
  fp32_t out_data [N_OUT];
  logic  w_en = 1'b0, w_is_bias = 1'b0;
  logic [5:0] w_row = '0, w_col = '0;
  fp32_t w_data = '0;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .REUSE(REUSE), .RELU(RELU)) dut (.*);

  real   w [N_OUT][N_IN];
  real   b [N_OUT];
  real   xs [N_PKT][N_IN];
  int    acc_cycle [N_PKT];
  int    n_in = 0, n_out = 0;
  bit    free_phase = 1'b1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL [%0dx%0d] %s", N_IN, N_OUT, what);
    end
  endtask

  initial begin
    fp32_t v;
    for (int j = 0; j < N_IN; j++) in_data[j] = '0;
    done = 0;
    wait (rst_n);
    // parameters
    for (int r = 0; r < N_OUT; r++) begin
      for (int c = 0; c <= N_IN; c++) begin
        v = r2fp(c == N_IN ? rand_real(-0.5, 0.5) : rand_real(-1.0, 1.0));
        @(negedge clk);
        w_en = 1'b1; w_is_bias = (c == N_IN); w_row = 6'(r); w_col = 6'(c % N_IN); w_data = v;
        if (c == N_IN) b[r] = fp2r(v); else w[r][c] = fp2r(v);
      end
    end
    @(negedge clk) w_en = 1'b0;
    // input vectors
    for (int p = 0; p < N_PKT; p++)
      for (int i = 0; i < N_IN; i++) xs[p][i] = fp2r(r2fp(rand_real(-2.0, 2.0)));
    while (n_in < N_PKT) begin
      @(negedge clk);
      for (int i = 0; i < N_IN; i++) in_data[i] = r2fp(xs[n_in][i]);
      in_valid = 1'b1;
      #1;
      if (in_ready) begin
        acc_cycle[n_in] = cycle;              // the cycle in which the vector is taken
        // while the output is always ready, accepts are exactly REUSE cycles apart
        if (free_phase && n_in > 1)
          chk(acc_cycle[n_in] - acc_cycle[n_in-1] == int'(REUSE),
              $sformatf("initiation interval %0d", acc_cycle[n_in] - acc_cycle[n_in-1]));
        n_in++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    wait (n_out == N_PKT);
    done = 1;
  end

  // output side: always ready for the first half, random back-pressure afterwards
  always @(negedge clk) begin
    free_phase = (n_in < N_PKT / 2) && (n_out < N_PKT / 2 - 4);
    out_ready  = free_phase ? 1'b1 : 1'($urandom_range(3) == 0);
  end

  bit seen_first = 1'b0;

  // all sampling half a cycle after the rising edge, once the combinational ready has settled
  always @(negedge clk) begin
    #1;
    if (rst_n && out_valid && !seen_first) begin
      seen_first = 1'b1;
      chk(cycle - acc_cycle[0] == int'(REUSE) + 1, $sformatf("latency %0d", cycle - acc_cycle[0]));
    end
    if (rst_n && out_valid && !out_ready && dut.busy) stalls++;
    if (rst_n && out_valid && out_ready) begin
      real ref_v, mag, tol, got;
      for (int j = 0; j < N_OUT; j++) begin
        ref_v = b[j];
        mag   = (b[j] < 0) ? -b[j] : b[j];
        for (int i = 0; i < N_IN; i++) begin
          ref_v += w[j][i] * xs[n_out][i];
          mag   += (w[j][i] * xs[n_out][i] < 0) ? -(w[j][i] * xs[n_out][i]) : w[j][i] * xs[n_out][i];
        end
        if (RELU && ref_v < 0) ref_v = 0.0;
        got = fp2r(out_data[j]);
        if (got == 0.0) zeros++;
        tol = 1e-5 * mag + 1e-30;
        chk((got - ref_v <= tol) && (ref_v - got <= tol),
            $sformatf("pkt %0d out %0d: got %g expected %g", n_out, j, got, ref_v));
        if (RELU) chk(!out_data[j][31], "negative value after ReLU");
      end
      n_out++;
    end
  end

endmodule
