// ids_pkg: shared types and constants of the intrusion-detection dataflow processor.
//
// All arithmetic is IEEE-754 binary32 (Float32), as in the design being modelled, which keeps
// every layer and activation in Float32. The layer sizes are those of the three MLP models:
// 24 input features, hidden layers of 32 and 64 neurons, and classification layers of 2
// (attack / no attack), 4 (category) and 7 (subcategory) outputs. REUSE_FACTOR is the reuse factor:
// each compute unit performs that many multiply-accumulates one after the other.
// The weight-load bus (wload_t) is this design's own choice: trained parameters are written
// into the layer memories through it before inference starts.
package ids_pkg;

  typedef logic [31:0] fp32_t;

  localparam int unsigned N_FEATURES    = 24;
  localparam int unsigned N_HIDDEN1     = 32;
  localparam int unsigned N_HIDDEN2     = 64;
  localparam int unsigned N_ATTACK      = 2;
  localparam int unsigned N_CATEGORY    = 4;
  localparam int unsigned N_SUBCATEGORY = 7;
  localparam int unsigned REUSE_FACTOR  = 4;

  localparam fp32_t FP32_ZERO    = 32'h0000_0000;
  localparam fp32_t FP32_ONE     = 32'h3F80_0000;
  localparam fp32_t FP32_POS_INF = 32'h7F80_0000;
  localparam fp32_t FP32_QNAN    = 32'h7FC0_0000;

  // Which MLP model a weight write goes to (top level only).
  typedef enum logic [1:0] {
    MODEL_ATTACK      = 2'd0,
    MODEL_CATEGORY    = 2'd1,
    MODEL_SUBCATEGORY = 2'd2
  } model_e;

  // One word of trained parameters. layer 0..2 selects the dense layer of a model; is_bias
  // selects the bias vector (col ignored) instead of the weight matrix; row is the output
  // neuron and col the input index.
  typedef struct packed {
    model_e      model;
    logic [1:0]  layer;
    logic        is_bias;
    logic [5:0]  row;
    logic [5:0]  col;
    fp32_t       data;
  } wload_t;

  // a > b for two ordered (non-NaN) binary32 values; +0 and -0 compare equal.
  function automatic logic fp32_gt(fp32_t a, fp32_t b);
    logic a_zero, b_zero;
    a_zero = (a[30:0] == 31'd0);
    b_zero = (b[30:0] == 31'd0);
    if (a_zero && b_zero)      return 1'b0;
    if (a[31] != b[31])        return b[31];            // a positive, b negative
    if (!a[31])                return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];                            // both negative
  endfunction

  // ReLU on a binary32 value: negative numbers (and -0) become +0.
  function automatic fp32_t fp32_relu(fp32_t a);
    return a[31] ? FP32_ZERO : a;
  endfunction

endpackage
