// mlp_ids: one MLP intrusion classifier as a layer-by-layer dataflow pipeline.
//
// Topology: N_IN input features -> dense N_H1 + ReLU -> dense N_H2 + ReLU -> dense N_CLASSES
// (linear) -> Softmax, all in Float32. The four stages are separate hardware joined by
// valid/ready vector streams, so while the classification layer works on one packet's
// features the hidden layers already work on the next ones.
// Interface: feature vector stream in (in_valid/in_ready/in_data), class-probability stream
// out (out_valid/out_ready/out_data); parameter writes through w_en/w_load, where
// w_load.layer (0, 1, 2) selects the dense layer and w_load.model is ignored.
// Timing: a feature vector taken in cycle t gives valid probabilities from cycle
// t + 3*(REUSE+1) + 1 (16 cycles for REUSE = 4); one new vector every REUSE cycles when the
// output is not stalled.
// From the design being modelled: the 24-32-64-N topology, ReLU hidden activations, the
// Softmax classification head, Float32 and the reuse factor 4. The streaming handshake
// between layers and the weight-write port are this design's own choices.
module mlp_ids
  import ids_pkg::*;
#(
  parameter int unsigned N_IN      = N_FEATURES,
  parameter int unsigned N_H1      = N_HIDDEN1,
  parameter int unsigned N_H2      = N_HIDDEN2,
  parameter int unsigned N_CLASSES = N_ATTACK,
  parameter int unsigned REUSE     = REUSE_FACTOR
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  fp32_t  in_data  [N_IN],
  output logic   out_valid,
  input  logic   out_ready,
  output fp32_t  out_data [N_CLASSES],
  input  logic   w_en,
  input  wload_t w_load
);

  logic  h1_valid, h1_ready, h2_valid, h2_ready, lg_valid, lg_ready;
  fp32_t h1 [N_H1];
  fp32_t h2 [N_H2];
  fp32_t lg [N_CLASSES];
  logic  w_en_l [3];

  for (genvar l = 0; l < 3; l++) begin : g_wsel
    assign w_en_l[l] = w_en && (w_load.layer == 2'(l));
  end

  dense_layer #(.N_IN(N_IN), .N_OUT(N_H1), .REUSE(REUSE), .RELU(1'b1)) u_fc1 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(h1_valid), .out_ready(h1_ready), .out_data(h1),
    .w_en(w_en_l[0]), .w_is_bias(w_load.is_bias), .w_row(w_load.row), .w_col(w_load.col),
    .w_data(w_load.data)
  );

  dense_layer #(.N_IN(N_H1), .N_OUT(N_H2), .REUSE(REUSE), .RELU(1'b1)) u_fc2 (
    .clk, .rst_n,
    .in_valid(h1_valid), .in_ready(h1_ready), .in_data(h1),
    .out_valid(h2_valid), .out_ready(h2_ready), .out_data(h2),
    .w_en(w_en_l[1]), .w_is_bias(w_load.is_bias), .w_row(w_load.row), .w_col(w_load.col),
    .w_data(w_load.data)
  );

  dense_layer #(.N_IN(N_H2), .N_OUT(N_CLASSES), .REUSE(REUSE), .RELU(1'b0)) u_fc3 (
    .clk, .rst_n,
    .in_valid(h2_valid), .in_ready(h2_ready), .in_data(h2),
    .out_valid(lg_valid), .out_ready(lg_ready), .out_data(lg),
    .w_en(w_en_l[2]), .w_is_bias(w_load.is_bias), .w_row(w_load.row), .w_col(w_load.col),
    .w_data(w_load.data)
  );

  softmax_layer #(.N(N_CLASSES)) u_softmax (
    .clk, .rst_n,
    .in_valid(lg_valid), .in_ready(lg_ready), .in_data(lg),
    .out_valid, .out_ready, .out_data
  );

endmodule
