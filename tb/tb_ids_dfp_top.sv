// tb_ids_dfp_top: end-to-end test of the three-model dataflow processor.
//
// The hidden and input widths are reduced (8 features, 8 and 12 hidden neurons) so that the
// simulator builds in reasonable time; the classification widths (2, 4, 7), the reuse factor
// (4), the Float32 datapath and all control are those of the full design. Three reference
// networks are written through the shared parameter port (model field selects the MLP), then
// 48 packets are broadcast. Each of the three result streams is checked against its
// double-precision reference (probabilities within 2e-5, same winning class).
// Mechanisms that must each occur at least once, counted and reported:
//   weight writes to every model, overlapped packets (a packet taken every REUSE cycles),
//   ReLU clamping, result back-pressure on every stream, input stalls caused by one held
//   stream, and the 16-cycle latency of the first packet.
module tb_ids_dfp_top;
  import ids_pkg::*;
  import tb_fp_pkg::*;
  import tb_mlp_ref_pkg::*;

  localparam int NI = 8, NH1 = 8, NH2 = 12, N_PKT = 48;

  logic   clk = 1'b0, rst_n = 1'b0;
  int     checks = 0, failures = 0, cycle = 0;
  logic   in_valid = 1'b0, in_ready, w_en = 1'b0;
  fp32_t  in_data [NI];
  logic   out_att_valid, out_cat_valid, out_sub_valid;
  logic   out_att_ready = 1'b1, out_cat_ready = 1'b1, out_sub_ready = 1'b1;
  fp32_t  out_att_data [N_ATTACK];
  fp32_t  out_cat_data [N_CATEGORY];
  fp32_t  out_sub_data [N_SUBCATEGORY];
  wload_t w_load = '0;

  ids_dfp_top #(.N_IN(NI), .N_H1(NH1), .N_H2(NH2)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
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

  mlp_ref net [3];
  real    xs [N_PKT][];
  int     acc_cycle [N_PKT];
  int     n_in = 0;
  int     n_out [3] = '{0, 0, 0};
  int     cnt_wr [3] = '{0, 0, 0};
  int     cnt_hold [3] = '{0, 0, 0};
  int     cnt_overlap = 0, cnt_in_stall = 0, cnt_latency = 0;
  bit     free_phase = 1'b1;

  initial begin
    wload_t q [$];
    net[0] = new(NI, NH1, NH2, N_ATTACK);
    net[1] = new(NI, NH1, NH2, N_CATEGORY);
    net[2] = new(NI, NH1, NH2, N_SUBCATEGORY);
    for (int p = 0; p < N_PKT; p++) begin
      xs[p] = new[NI];
      foreach (xs[p][i]) xs[p][i] = fp2r(r2fp(rand_real(-2.0, 2.0)));
    end
    foreach (in_data[i]) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    net[0].words(MODEL_ATTACK, q);
    net[1].words(MODEL_CATEGORY, q);
    net[2].words(MODEL_SUBCATEGORY, q);
    q.shuffle();                                   // models written interleaved
    foreach (q[i]) begin
      @(negedge clk);
      w_en = 1'b1; w_load = q[i];
      cnt_wr[int'(q[i].model)]++;
    end
    @(negedge clk) w_en = 1'b0;
    while (n_in < N_PKT) begin
      @(negedge clk);
      foreach (in_data[i]) in_data[i] = r2fp(xs[n_in][i]);
      in_valid = 1'b1;
      #1;
      if (in_ready) begin
        acc_cycle[n_in] = cycle;
        if (free_phase && n_in > 0) begin
          chk(acc_cycle[n_in] - acc_cycle[n_in-1] == int'(REUSE_FACTOR),
              $sformatf("initiation interval %0d", acc_cycle[n_in] - acc_cycle[n_in-1]));
          cnt_overlap++;
        end
        n_in++;
      end else begin
        cnt_in_stall++;
      end
    end
    @(negedge clk) in_valid = 1'b0;
    wait (n_out[0] == N_PKT && n_out[1] == N_PKT && n_out[2] == N_PKT);
    $display("weight writes %0d/%0d/%0d, overlapped packets %0d, input stalls %0d",
             cnt_wr[0], cnt_wr[1], cnt_wr[2], cnt_overlap, cnt_in_stall);
    $display("held results %0d/%0d/%0d, ReLU clamps %0d, latency checks %0d",
             cnt_hold[0], cnt_hold[1], cnt_hold[2],
             net[0].relu_zeros + net[1].relu_zeros + net[2].relu_zeros, cnt_latency);
    foreach (cnt_wr[m]) chk(cnt_wr[m] > 0, "a model never received parameters");
    foreach (cnt_hold[m]) chk(cnt_hold[m] > 0, "a result stream was never held");
    chk(cnt_overlap > 0, "packets never overlapped");
    chk(cnt_in_stall > 0, "input never stalled");
    chk(net[0].relu_zeros > 0, "ReLU never clamped");
    chk(cnt_latency > 0, "latency never measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result side: always ready while the first half is sent, then each stream is held at random
  always @(negedge clk) begin
    free_phase    = (n_in < N_PKT / 2);
    out_att_ready = free_phase || ($urandom_range(3) == 0);
    out_cat_ready = free_phase || ($urandom_range(2) == 0);
    out_sub_ready = free_phase || ($urandom_range(4) == 0);
  end

  task automatic check_stream(int m, logic v, logic r, fp32_t d []);
    real p [];
    int  best_ref, best_got;
    if (!(rst_n && v)) return;
    if (!r) begin
      cnt_hold[m]++;
      return;
    end
    if (n_out[m] == 0) begin
      chk(cycle - acc_cycle[0] == 3 * (int'(REUSE_FACTOR) + 1) + 1,
          $sformatf("model %0d latency %0d", m, cycle - acc_cycle[0]));
      cnt_latency++;
    end
    net[m].forward(xs[n_out[m]], p);
    best_ref = 0; best_got = 0;
    foreach (p[i]) begin
      chk(fp2r(d[i]) - p[i] < 2e-5 && p[i] - fp2r(d[i]) < 2e-5,
          $sformatf("model %0d pkt %0d class %0d: got %g expected %g", m, n_out[m], i,
                    fp2r(d[i]), p[i]));
      if (p[i] > p[best_ref]) best_ref = i;
      if (fp2r(d[i]) > fp2r(d[best_got])) best_got = i;
    end
    chk(best_ref == best_got, $sformatf("model %0d pkt %0d class %0d expected %0d", m, n_out[m],
                                        best_got, best_ref));
    n_out[m]++;
  endtask

  always @(negedge clk) begin
    #1;
    check_stream(0, out_att_valid, out_att_ready, out_att_data);
    check_stream(1, out_cat_valid, out_cat_ready, out_cat_data);
    check_stream(2, out_sub_valid, out_sub_ready, out_sub_data);
  end

endmodule
