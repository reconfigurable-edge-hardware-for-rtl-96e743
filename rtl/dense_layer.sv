// dense_layer: fully connected Float32 layer with reuse factor, y = act(W x + b).
//
// The layer holds its trained weights and biases in an on-chip memory and has
// N_IN*N_OUT/REUSE compute units; each unit multiplies one weight by one input per cycle and
// so performs REUSE multiply-accumulates one after the other for every input vector. Inputs
// are interleaved over the steps: in step k (0..REUSE-1) output neuron j uses inputs
// i = p*REUSE + k, p = 0..N_IN/REUSE-1. Within a step the products of one neuron are summed
// in a chain of adders that starts from the bias (step 0) or from the running sum, and the
// result is written back to the neuron's accumulator. After the last step the activation
// (ReLU when RELU=1, identity otherwise) is applied and the vector is registered at the output.
//
// Interface: valid/ready streams of whole vectors (a transfer happens on a rising edge where
// valid and ready are both high); a weight-write port (w_en, w_is_bias, w_row = output neuron,
// w_col = input index, w_data) that must only be used while the layer is idle.
// Timing: a vector taken in cycle t is valid at the output from cycle t+REUSE+1 (the REUSE
// steps run in cycles t+1..t+REUSE). A new vector is taken every REUSE cycles, in the cycle the
// previous one finishes. If the output register is still full when the last step is reached,
// the layer stalls in that step.
// From the design being modelled: Float32 arithmetic, the layer sizes, ReLU, and the reuse
// factor of four sequential MACs per compute unit. This design's own choices: the input
// interleaving, the adder chain, the handshake and the weight-write port (the modelled design
// has its parameters fixed at synthesis, and they are not published).
module dense_layer
  import ids_pkg::*;
#(
  parameter int unsigned N_IN  = N_FEATURES,
  parameter int unsigned N_OUT = N_HIDDEN1,
  parameter int unsigned REUSE = REUSE_FACTOR,
  parameter bit          RELU  = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // input vector stream
  input  logic        in_valid,
  output logic        in_ready,
  input  fp32_t       in_data  [N_IN],
  // output vector stream
  output logic        out_valid,
  input  logic        out_ready,
  output fp32_t       out_data [N_OUT],
  // parameter write port
  input  logic        w_en,
  input  logic        w_is_bias,
  input  logic [5:0]  w_row,
  input  logic [5:0]  w_col,
  input  fp32_t       w_data
);

  localparam int unsigned P  = N_IN / REUSE;            // products per neuron per step
  localparam int unsigned KW = (REUSE > 1) ? $clog2(REUSE) : 1;

  initial begin
    assert (N_IN % REUSE == 0) else $error("N_IN must be a multiple of REUSE");
    assert (N_IN <= 64 && N_OUT <= 64) else $error("write port addresses at most 64 rows/cols");
  end

  // parameter memory: one row of N_OUT*P weights per step
  fp32_t w_mem [REUSE][N_OUT][P];
  fp32_t b_mem [N_OUT];

  logic           busy;
  logic [KW-1:0]  k;
  fp32_t          x_reg [N_IN];
  fp32_t          acc   [N_OUT];
  fp32_t          x_sel [P];
  fp32_t          nsum  [N_OUT];   // neuron sum after the current step
  logic           last_step, finish, stall;

  assign last_step = busy && (32'(k) == REUSE - 1);
  assign stall     = last_step && out_valid && !out_ready;
  assign finish    = last_step && !stall;
  assign in_ready  = !busy || finish;

  // inputs used in the current step
  always_comb begin
    for (int p = 0; p < P; p++) x_sel[p] = x_reg[p * REUSE + 32'(k)];
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    fp32_t start;
    assign start = (k == '0) ? b_mem[j] : acc[j];
    for (genvar p = 0; p < P; p++) begin : g_unit
      fp32_t prod, s_in, s_out;
      if (p == 0) begin : g_head
        assign s_in = start;
      end else begin : g_link
        assign s_in = g_unit[p-1].s_out;
      end
      fp32_mul u_mul (.a(w_mem[k][j][p]), .b(x_sel[p]), .y(prod));
      fp32_add u_add (.a(s_in), .b(prod), .y(s_out));
    end
    assign nsum[j] = g_unit[P-1].s_out;
  end

  always_ff @(posedge clk) begin
    if (w_en) begin
      if (w_is_bias) b_mem[32'(w_row)] <= w_data;
      else           w_mem[32'(w_col) % REUSE][32'(w_row)][32'(w_col) / REUSE] <= w_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      k         <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (busy && !stall) begin
        if (last_step) begin
          for (int j = 0; j < N_OUT; j++)
            out_data[j] <= RELU ? fp32_relu(nsum[j]) : nsum[j];
          out_valid <= 1'b1;
          busy      <= 1'b0;
        end else begin
          for (int j = 0; j < N_OUT; j++) acc[j] <= nsum[j];
          k <= k + 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        x_reg <= in_data;
        busy  <= 1'b1;
        k     <= '0;
      end
    end
  end

  // an output vector is held until it is taken
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid);

endmodule
