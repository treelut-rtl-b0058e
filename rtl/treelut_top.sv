// treelut_top -- complete TreeLUT GBDT inference engine.
//
// A gradient-boosted decision-tree classifier, after TreeLUT quantization, is
// computed by three fully unrolled layers:
//   1. key generator  (treelut_keygen): every distinct "x[f] <= t" comparison of
//      the whole ensemble, once;
//   2. decision trees (treelut_tree): N_CLASSES x N_TREES trees, each a
//      multiplexer cascade that picks its quantized leaf value qf from the keys;
//   3. adder trees    (treelut_adder_tree): one per class, summing that class's
//      N_TREES leaf values.
// This module is the key generator followed by treelut_engine, which holds
// layers 2 and 3, the pipeline registers and the binary class decision.
// Binary models (N_CLASSES = 1) give the class on y_hat. Multiclass models give
// the class scores QF_n; the class is the index of the largest score.
//
// Timing: latency is P0 + P1 + P2 clocks from x to score/y_hat (P0 after the
// key generator, P1 after the trees, P2 inside the adder trees), and a new input
// may be applied on every clock. out_valid is in_valid delayed by the same
// latency.
//
// Interface: x[i] are W_FEATURE-bit unsigned features (min-max scaled and
// rounded before the circuit); score[n] is W_SUM bits unsigned.
// The model is the KEYS / NODES / QB parameter set (formats in treelut_pkg).
// The defaults are the shape of the MNIST "TreeLUT (I)" design with synthetic
// contents (treelut_model_pkg). The layering and the unique-key sharing follow
// TreeLUT; the port layout and parameter formats are this design's own.
module treelut_top
  import treelut_pkg::*;
#(
  parameter int unsigned N_CLASSES  = treelut_model_pkg::N_CLASSES,
  parameter int unsigned N_TREES    = treelut_model_pkg::N_TREES,
  parameter int unsigned MAX_DEPTH  = treelut_model_pkg::MAX_DEPTH,
  parameter int unsigned N_FEATURES = treelut_model_pkg::N_FEATURES,
  parameter int unsigned W_FEATURE  = treelut_model_pkg::W_FEATURE,
  parameter int unsigned W_TREE     = treelut_model_pkg::W_TREE,
  parameter int unsigned W_BIAS     = treelut_model_pkg::W_BIAS,
  parameter int unsigned N_KEYS     = treelut_model_pkg::N_KEYS,
  parameter int unsigned P0         = treelut_model_pkg::P0,
  parameter int unsigned P1         = treelut_model_pkg::P1,
  parameter int unsigned P2         = treelut_model_pkg::P2,
  parameter key_t [0:N_KEYS-1] KEYS = treelut_model_pkg::KEYS,
  parameter node_t [0:N_CLASSES*N_TREES-1][0:nodes_per_tree(MAX_DEPTH)-1] NODES =
                   treelut_model_pkg::NODES,
  // Quantized biases qb_n as 32-bit two's complement numbers.
  parameter logic [0:N_CLASSES-1][31:0] QB = treelut_model_pkg::QB,
  localparam int unsigned W_SUM = sum_width(N_TREES, W_TREE, N_CLASSES > 1, W_BIAS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [W_FEATURE-1:0] x [N_FEATURES],
  output logic                 out_valid,
  output logic [W_SUM-1:0]     score [N_CLASSES],
  output logic                 y_hat
);

  // ---- Layer 1: key generator ------------------------------------------------
  logic [N_KEYS-1:0] keys;

  treelut_keygen #(
    .N_FEATURES(N_FEATURES), .W_FEATURE(W_FEATURE), .N_KEYS(N_KEYS), .KEYS(KEYS)
  ) u_keygen (
    .x(x),
    .k(keys)
  );

  // ---- Layers 2 and 3 with all pipeline registers ------------------------------
  treelut_engine #(
    .N_CLASSES(N_CLASSES), .N_TREES(N_TREES), .MAX_DEPTH(MAX_DEPTH),
    .W_TREE(W_TREE), .W_BIAS(W_BIAS), .N_KEYS(N_KEYS),
    .P0(P0), .P1(P1), .P2(P2), .NODES(NODES), .QB(QB)
  ) u_engine (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .k        (keys),
    .out_valid(out_valid),
    .score    (score),
    .y_hat    (y_hat)
  );

endmodule
