// ids_dfp_top: the Float32 dataflow processor for intrusion detection, three MLP classifiers
// side by side.
//
// One stream of 24-feature vectors (one per network flow record/packet) is broadcast to three
// independent MLP pipelines: the Attack model (2 classes: benign / attack), the Category model
// (4 classes) and the Subcategory model (7 classes). Each has its own result stream of class
// probabilities. A feature vector is taken only when all three pipelines can accept it, so the
// three results of one packet always come out in the same order as the packets went in.
// Interface: in_valid/in_ready/in_data (24 x binary32); per model out_*_valid/ready/data;
// a shared parameter-write port (w_en, w_load) where w_load.model selects the MLP.
// Timing: with REUSE = 4, one packet every 4 cycles and 16 cycles of latency (from the cycle a
// packet is taken to the first cycle its results are valid) when no result stream is stalled.
// From the design being modelled: three MLP IPs for the three classification targets, the
// layer sizes, Float32 and the reuse factor. This design's own choices: the common input
// stream, the handshake and the write port for the trained parameters.
module ids_dfp_top
  import ids_pkg::*;
#(
  parameter int unsigned N_IN  = N_FEATURES,
  parameter int unsigned N_H1  = N_HIDDEN1,
  parameter int unsigned N_H2  = N_HIDDEN2,
  parameter int unsigned REUSE = REUSE_FACTOR
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  fp32_t  in_data     [N_IN],
  output logic   out_att_valid,
  input  logic   out_att_ready,
  output fp32_t  out_att_data [N_ATTACK],
  output logic   out_cat_valid,
  input  logic   out_cat_ready,
  output fp32_t  out_cat_data [N_CATEGORY],
  output logic   out_sub_valid,
  input  logic   out_sub_ready,
  output fp32_t  out_sub_data [N_SUBCATEGORY],
  input  logic   w_en,
  input  wload_t w_load
);

  logic rdy_att, rdy_cat, rdy_sub, take;

  assign in_ready = rdy_att && rdy_cat && rdy_sub;
  assign take     = in_valid && in_ready;

  mlp_ids #(.N_IN(N_IN), .N_H1(N_H1), .N_H2(N_H2), .N_CLASSES(N_ATTACK), .REUSE(REUSE)) u_attack (
    .clk, .rst_n, .in_valid(take), .in_ready(rdy_att), .in_data,
    .out_valid(out_att_valid), .out_ready(out_att_ready), .out_data(out_att_data),
    .w_en(w_en && w_load.model == MODEL_ATTACK), .w_load
  );

  mlp_ids #(.N_IN(N_IN), .N_H1(N_H1), .N_H2(N_H2), .N_CLASSES(N_CATEGORY), .REUSE(REUSE)) u_category (
    .clk, .rst_n, .in_valid(take), .in_ready(rdy_cat), .in_data,
    .out_valid(out_cat_valid), .out_ready(out_cat_ready), .out_data(out_cat_data),
    .w_en(w_en && w_load.model == MODEL_CATEGORY), .w_load
  );

  mlp_ids #(.N_IN(N_IN), .N_H1(N_H1), .N_H2(N_H2), .N_CLASSES(N_SUBCATEGORY), .REUSE(REUSE)) u_subcategory (
    .clk, .rst_n, .in_valid(take), .in_ready(rdy_sub), .in_data,
    .out_valid(out_sub_valid), .out_ready(out_sub_ready), .out_data(out_sub_data),
    .w_en(w_en && w_load.model == MODEL_SUBCATEGORY), .w_load
  );

endmodule
