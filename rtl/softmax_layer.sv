// softmax_layer: fully unrolled Float32 Softmax, y_i = exp(x_i - max) / sum_j exp(x_j - max).
//
// All N outputs are computed in parallel in one combinational stage: the maximum input is
// found with a comparator chain, subtracted from every input (so every exponent argument is
// <= 0 and the sum lies in [1, N]), the N exponentials are summed in an adder chain, the sum
// is inverted once by a reciprocal unit and every exponential is multiplied by it.
// Interface: valid/ready vector streams in and out; the result is registered.
// Timing: a vector taken in cycle t is valid at the output from cycle t+1; a new vector every cycle unless
// the output is stalled.
// From the design being modelled: a Softmax after the classification layer, in Float32 and
// fully unrolled. This design's own choices: subtracting the maximum for range safety,
// one reciprocal followed by multiplications instead of N divisions, and the handshake.
module softmax_layer
  import ids_pkg::*;
#(
  parameter int unsigned N = N_ATTACK
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  fp32_t in_data  [N],
  output logic  out_valid,
  input  logic  out_ready,
  output fp32_t out_data [N]
);

  fp32_t mx, neg_mx, recip;
  fp32_t diff [N];
  fp32_t ex   [N];
  fp32_t sum  [N];
  fp32_t y    [N];

  always_comb begin
    mx = in_data[0];
    for (int i = 1; i < N; i++)
      if (fp32_gt(in_data[i], mx)) mx = in_data[i];
    neg_mx = {~mx[31], mx[30:0]};
  end

  for (genvar i = 0; i < N; i++) begin : g_lane
    fp32_add u_sub (.a(in_data[i]), .b(neg_mx), .y(diff[i]));
    fp32_exp u_exp (.x(diff[i]), .y(ex[i]));
    if (i == 0) begin : g_first
      assign sum[0] = ex[0];
    end else begin : g_acc
      fp32_add u_sum (.a(sum[i-1]), .b(ex[i]), .y(sum[i]));
    end
    fp32_mul u_norm (.a(ex[i]), .b(recip), .y(y[i]));
  end

  fp32_recip u_recip (.x(sum[N-1]), .y(recip));

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_data  <= y;
        out_valid <= 1'b1;
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid);

endmodule
