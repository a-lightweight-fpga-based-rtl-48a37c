// qmlp_pkg - shared sizes, types and layout functions of the CAN intrusion
// detection accelerator.
//
// The network is a quantised multi-layer perceptron (QMLP) with 40 INT8 inputs
// and five dense layers of 256, 128, 64, 32 and 1 units. Hidden layers use a
// batch-normalisation + ReLU stage and the single output goes through a
// sigmoid. The input is the concatenation of the last 4 CAN messages, 10 INT8
// values per message. These numbers are the model's own; the memory layout
// below (one weight word per input holding LANES output neurons) is a choice
// of this implementation.
package qmlp_pkg;

  // Model shape
  localparam int NUM_LAYERS   = 5;
  localparam int MSG_BYTES    = 10;   // 2 ID bytes + 8 payload bytes
  localparam int FIFO_DEPTH   = 4;    // messages in the feature window
  localparam int NUM_FEATURES = MSG_BYTES * FIFO_DEPTH;  // 40
  localparam int MAX_UNITS    = 256;  // widest layer

  // Units per layer boundary: index 0 is the input, 1..5 the dense layers.
  localparam int UNITS [0:NUM_LAYERS] = '{40, 256, 128, 64, 32, 1};

  // Default number of output neurons computed in parallel per cycle.
  localparam int DEF_LANES = 8;

  // Accumulator width: 256 products of two INT8 values plus a shifted bias.
  localparam int ACC_W = 32;

  typedef logic signed [7:0]       int8_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Per-layer requantisation settings written by the host.
  typedef struct packed {
    logic [4:0] bias_shift;  // bias is added as (bias <<< bias_shift)
    logic [4:0] out_shift;   // accumulator is divided by 2**out_shift, rounded
  } layer_cfg_t;

  // Result of one inference.
  typedef struct packed {
    logic        attack;  // probability >= 0.5
    logic [7:0]  prob;    // sigmoid output, 0..255 stands for 0..255/256
    int8_t       logit;   // INT8 output of the last dense layer
  } qmlp_result_t;

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  // Output-neuron groups of layer l (1-based) for a given lane count.
  function automatic int groups(input int l, input int lanes);
    return ceil_div(UNITS[l], lanes);
  endfunction

  // First weight word of layer l: layers are stored one after another, each as
  // groups(l) x UNITS[l-1] words.
  function automatic int weight_base(input int l, input int lanes);
    int base = 0;
    for (int k = 1; k < l; k++) base += groups(k, lanes) * UNITS[k-1];
    return base;
  endfunction

  function automatic int weight_words(input int lanes);
    return weight_base(NUM_LAYERS + 1, lanes);
  endfunction

  // First bias word of layer l: one word of LANES biases per group.
  function automatic int bias_base(input int l, input int lanes);
    int base = 0;
    for (int k = 1; k < l; k++) base += groups(k, lanes);
    return base;
  endfunction

  function automatic int bias_words(input int lanes);
    return bias_base(NUM_LAYERS + 1, lanes);
  endfunction

  // Cycles of one inference in qmlp_core: one load cycle, then per group one
  // cycle per input, one drain cycle and one write-back cycle, then the
  // sigmoid/result cycle.
  function automatic int inference_cycles(input int lanes);
    int c = 1;
    for (int l = 1; l <= NUM_LAYERS; l++) c += groups(l, lanes) * (UNITS[l-1] + 2);
    return c + 1;
  endfunction

endpackage
