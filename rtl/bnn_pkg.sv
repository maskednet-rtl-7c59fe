// bnn_pkg -- shared sizes and helper functions of the masked binarized
// neural network (BNN) inference engine.
//
// The engine classifies 28x28 8-bit images with three fully connected
// hidden layers of 1024 binary neurons and a 10-neuron output layer. Every
// weighted sum passes through one pipelined adder tree of depth 10, twice per
// neuron: once for the masked-value share a-r and once for the mask share r.
// The sizes below are those of the published design; the bias width is this
// design's own choice (the source only says biases are integers).
package bnn_pkg;

  // The network shape (784 inputs, 3 x 1024 hidden neurons, 10 outputs) is
  // set by the parameters of masked_bnn_top.
  localparam int unsigned PIX_W            = 8;    // unsigned pixel
  localparam int unsigned LEAF_W           = PIX_W + 1; // signed share at tree leaf
  localparam int unsigned BIAS_W           = 16;   // own choice

  // Phase of a neuron's pass through the adder tree.
  typedef enum logic {PH_AMR = 1'b0, PH_R = 1'b1} phase_e;

  // Source of the adder tree leaves.
  typedef enum logic [1:0] {
    SRC_IN_AMR = 2'd0,  // input layer, a_i - r_i memory times w_i
    SRC_IN_R   = 2'd1,  // input layer, r_i memory times w_i
    SRC_B2A    = 2'd2   // hidden/output layers, Boolean-to-arithmetic output
  } leaf_src_e;

  // Sideband carried with every beat through the datapath: which layer,
  // which neuron and which phase a sum belongs to.
  typedef struct packed {
    phase_e      phase;
    logic [1:0]  layer;   // 0..2 hidden layers, 3 output layer
    logic [10:0] neuron;
  } tag_t;
  localparam int unsigned TAG_W = $bits(tag_t);

  // Depth of a binary tree over n leaves.
  function automatic int unsigned tree_depth(input int unsigned n);
    int unsigned d = 0;
    int unsigned m = 1;
    while (m < n) begin
      m = m * 2;
      d++;
    end
    return (d == 0) ? 1 : d;
  endfunction

  // Number of elements at tree level lvl (level 0 = leaves).
  function automatic int unsigned level_size(input int unsigned n, input int unsigned lvl);
    int unsigned s = n;
    for (int unsigned i = 0; i < lvl; i++) s = (s + 1) / 2;
    return s;
  endfunction

  // Offset of level lvl in a flat array holding all levels.
  function automatic int unsigned level_offset(input int unsigned n, input int unsigned lvl);
    int unsigned o = 0;
    for (int unsigned i = 0; i < lvl; i++) o += level_size(n, i);
    return o;
  endfunction

endpackage
