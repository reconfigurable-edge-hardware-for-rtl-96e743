// tb_mlp_ids: end-to-end test of one MLP classifier pipeline (24-32-64-4, reuse factor 4).
//
// A reference network with random weights is written into the three dense layers through the
// parameter port, then 60 random feature vectors are streamed in. Every probability must be
// within 2e-5 of the double-precision reference, and the winning class must agree wherever the
// reference's top two probabilities differ by more than 1e-3. Timing checks: the first result
// is valid 16 cycles (3*(REUSE+1)+1) after its vector was taken, and while the output is always
// ready a vector is taken every 4 cycles, showing that the layers overlap. A back-pressure phase
// must stall the pipeline at least once.
module tb_mlp_ids;
  import ids_pkg::*;
  import tb_fp_pkg::*;
  import tb_mlp_ref_pkg::*;

  localparam int NC    = N_CATEGORY;
  localparam int N_PKT = 60;

  logic   clk = 1'b0, rst_n = 1'b0;
  int     checks = 0, failures = 0, cycle = 0, stalls = 0;
  logic   in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1, w_en = 1'b0;
  fp32_t  in_data [N_FEATURES];
  fp32_t  out_data [NC];
  wload_t w_load = '0;

  mlp_ids #(.N_CLASSES(NC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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

  mlp_ref  net;
  real     xs [N_PKT][];
  int      acc_cycle [N_PKT];
  int      n_in = 0, n_out = 0;
  bit      free_phase = 1'b1;

  initial begin
    wload_t q [$];
    net = new(N_FEATURES, N_HIDDEN1, N_HIDDEN2, NC);
    for (int p = 0; p < N_PKT; p++) begin
      xs[p] = new[N_FEATURES];
      foreach (xs[p][i]) xs[p][i] = fp2r(r2fp(rand_real(-2.0, 2.0)));
    end
    foreach (in_data[i]) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    net.words(MODEL_CATEGORY, q);
    foreach (q[i]) begin
      @(negedge clk);
      w_en = 1'b1; w_load = q[i];
    end
    @(negedge clk) w_en = 1'b0;
    while (n_in < N_PKT) begin
      @(negedge clk);
      foreach (in_data[i]) in_data[i] = r2fp(xs[n_in][i]);
      in_valid = 1'b1;
      #1;
      if (in_ready) begin
        acc_cycle[n_in] = cycle;
        if (free_phase && n_in > 0)
          chk(acc_cycle[n_in] - acc_cycle[n_in-1] == int'(REUSE_FACTOR),
              $sformatf("initiation interval %0d", acc_cycle[n_in] - acc_cycle[n_in-1]));
        n_in++;
      end
    end
    @(negedge clk) in_valid = 1'b0;
    wait (n_out == N_PKT);
    chk(stalls > 0, "pipeline never stalled");
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit seen_first = 1'b0;
  always @(negedge clk) begin
    free_phase = (n_in < N_PKT / 2);
    out_ready  = free_phase ? 1'b1 : 1'($urandom_range(4) == 0);
    #1;
    if (rst_n && in_valid && !in_ready) stalls++;
    if (rst_n && out_valid && !seen_first) begin
      seen_first = 1'b1;
      chk(cycle - acc_cycle[0] == 3 * (int'(REUSE_FACTOR) + 1) + 1,
          $sformatf("latency %0d", cycle - acc_cycle[0]));
    end
    if (rst_n && out_valid && out_ready) begin
      real p [];
      int  best_ref, best_got;
      net.forward(xs[n_out], p);
      best_ref = 0; best_got = 0;
      for (int i = 0; i < NC; i++) begin
        chk(fp2r(out_data[i]) - p[i] < 2e-5 && p[i] - fp2r(out_data[i]) < 2e-5,
            $sformatf("pkt %0d class %0d: got %g expected %g", n_out, i, fp2r(out_data[i]), p[i]));
        if (p[i] > p[best_ref]) best_ref = i;
        if (fp2r(out_data[i]) > fp2r(out_data[best_got])) best_got = i;
      end
      chk(best_ref == best_got, $sformatf("pkt %0d class %0d expected %0d", n_out, best_got, best_ref));
      n_out++;
    end
  end

endmodule
