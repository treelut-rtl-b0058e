// treelut_model_pkg -- the default model of treelut_top.
//
// Its shape is that of the largest TreeLUT configuration evaluated, the MNIST
// classifier "TreeLUT (I)": 784 input features quantized to w_feature = 4 bits,
// 10 classes with n_estimators = 30 trees each (300 trees), max_depth = 5,
// leaves quantized to w_tree = 3 bits, pipelining [p0, p1, p2] = [0, 1, 1].
//
// The trained trees themselves are not published, so the contents are a
// deterministic synthetic stand-in built at elaboration by
// treelut_pkg::synth_key / synth_tree from SEED: 2048 unique keys, random
// splits, some paths ending early, per-tree leaf ranges of 3, 2 or 1 bits with
// each tree's smallest leaf at 0, and positive per-class biases below 2^W_BIAS.
// The number of keys and the bias width are assumptions. A real model is used
// by overriding treelut_top's KEYS, NODES and QB parameters (or by replacing
// this package with one holding the trained values).
package treelut_model_pkg;
  import treelut_pkg::*;

  localparam int unsigned N_CLASSES  = 10;
  localparam int unsigned N_TREES    = 30;
  localparam int unsigned MAX_DEPTH  = 5;
  localparam int unsigned N_FEATURES = 784;
  localparam int unsigned W_FEATURE  = 4;
  localparam int unsigned W_TREE     = 3;
  localparam int unsigned W_BIAS     = 8;
  localparam int unsigned N_KEYS     = 2048;
  localparam int unsigned P0         = 0;
  localparam int unsigned P1         = 1;
  localparam int unsigned P2         = 1;
  localparam logic [31:0] SEED       = 32'h7EE1_0C01;
  localparam int unsigned N_NODES    = nodes_per_tree(MAX_DEPTH);

  typedef key_t [0:N_KEYS-1]                          keys_t;
  typedef node_t [0:N_CLASSES*N_TREES-1][0:N_NODES-1] nodes_t;
  typedef logic [0:N_CLASSES-1][31:0]                 bias_t;

  function automatic keys_t make_keys();
    keys_t r;
    for (int unsigned i = 0; i < N_KEYS; i++)
      r[i] = synth_key(i, N_FEATURES, W_FEATURE);
    return r;
  endfunction

  function automatic nodes_t make_nodes();
    nodes_t    r;
    tree_buf_t b;
    for (int unsigned t = 0; t < N_CLASSES * N_TREES; t++) begin
      b    = synth_tree(SEED, t, MAX_DEPTH, N_KEYS, W_TREE);
      r[t] = b[0:N_NODES-1];
    end
    return r;
  endfunction

  function automatic bias_t make_bias();
    bias_t       r;
    logic [31:0] s = SEED;
    for (int unsigned n = 0; n < N_CLASSES; n++) begin
      s    = lcg_next(s);
      r[n] = 32'(s[30:16]) % (32'd1 << W_BIAS);
    end
    return r;
  endfunction

  localparam keys_t  KEYS  = make_keys();
  localparam nodes_t NODES = make_nodes();
  localparam bias_t  QB    = make_bias();

endpackage
