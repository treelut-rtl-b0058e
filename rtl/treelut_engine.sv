// treelut_engine -- TreeLUT GBDT inference from the keys onward: decision trees
// and adder trees, with their pipeline registers and the binary class decision.
//
// The input is the vector of keys k[i] = (x[f_i] <= t_i), one bit per distinct
// comparison of the ensemble. treelut_top computes them with treelut_keygen
// and feeds this module. Used on its own, this module is TreeLUT with the key
// generator bypassed, the variant evaluated when the comparisons are made
// before the circuit, like a thermometer encoding of the inputs. Nothing else
// changes between the two.
//
// Per class, N_TREES treelut_tree instances turn the keys into quantized leaf
// values qf, and one treelut_adder_tree sums them. Binary models (N_CLASSES =
// 1) add no bias. Their bias-free sum is compared with -qb
// (treelut_binary_decision), and y_hat is the class. Multiclass models add the
// non-negative bias qb_n inside each class's adder tree and deliver the class
// scores QF_n. As in TreeLUT, no argmax circuit is built; y_hat is then 0.
//
// Pipelining: P0 register stages on the keys, P1 after the decision trees and
// P2 spread over the levels of each adder tree. No register is ever placed
// inside a tree. Latency is P0 + P1 + P2 clocks from k to score/y_hat, and a new
// key vector may be applied on every clock. in_valid travels along a resettable
// shift register of the same length and comes out as out_valid; it does not
// gate the datapath.
//
// Interface: k is N_KEYS bits; score[n] is W_SUM bits unsigned. The model is the
// NODES / QB parameter set (formats in treelut_pkg). The defaults are the shape
// of the MNIST "TreeLUT (I)" design with synthetic contents
// (treelut_model_pkg). The layering, the bias handling and the pipelining rules
// follow TreeLUT; the valid flag, reset, port layout and parameter formats are
// this design's own.
module treelut_engine
  import treelut_pkg::*;
#(
  parameter int unsigned N_CLASSES  = treelut_model_pkg::N_CLASSES,
  parameter int unsigned N_TREES    = treelut_model_pkg::N_TREES,
  parameter int unsigned MAX_DEPTH  = treelut_model_pkg::MAX_DEPTH,
  parameter int unsigned W_TREE     = treelut_model_pkg::W_TREE,
  parameter int unsigned W_BIAS     = treelut_model_pkg::W_BIAS,
  parameter int unsigned N_KEYS     = treelut_model_pkg::N_KEYS,
  parameter int unsigned P0         = treelut_model_pkg::P0,
  parameter int unsigned P1         = treelut_model_pkg::P1,
  parameter int unsigned P2         = treelut_model_pkg::P2,
  parameter node_t [0:N_CLASSES*N_TREES-1][0:nodes_per_tree(MAX_DEPTH)-1] NODES =
                   treelut_model_pkg::NODES,
  // Quantized biases qb_n as 32-bit two's complement numbers.
  parameter logic [0:N_CLASSES-1][31:0] QB = treelut_model_pkg::QB,
  // Width of a class score: exactly enough for N_TREES full-scale leaves plus,
  // in multiclass mode, the largest bias.
  localparam int unsigned W_SUM = sum_width(N_TREES, W_TREE, N_CLASSES > 1, W_BIAS),
  localparam int unsigned LATENCY = P0 + P1 + P2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [N_KEYS-1:0]    k,
  output logic                 out_valid,
  output logic [W_SUM-1:0]     score [N_CLASSES],
  output logic                 y_hat
);

  localparam bit MULTICLASS = (N_CLASSES > 1);

  // ---- p0 on the keys ------------------------------------------------------
  logic [N_KEYS-1:0] keys_q;

  treelut_pipe_reg #(.WIDTH(N_KEYS), .STAGES(P0), .RESETTABLE(1'b0)) u_p0 (
    .clk(clk), .rst_n(rst_n), .d(k), .q(keys_q)
  );

  // ---- Layers 2 and 3, one slice per class -------------------------------
  for (genvar n = 0; n < N_CLASSES; n++) begin : g_class
    logic [W_TREE-1:0] qf_c [N_TREES];  // tree outputs
    logic [W_TREE-1:0] qf_q [N_TREES];  // after p1
    logic [W_SUM-1:0]  sum;

    for (genvar m = 0; m < N_TREES; m++) begin : g_tree
      treelut_tree #(
        .MAX_DEPTH(MAX_DEPTH), .N_KEYS(N_KEYS), .W_TREE(W_TREE),
        .TREE(NODES[n*N_TREES + m])
      ) u_tree (
        .k (keys_q),
        .qf(qf_c[m])
      );

      treelut_pipe_reg #(.WIDTH(W_TREE), .STAGES(P1), .RESETTABLE(1'b0)) u_p1 (
        .clk(clk), .rst_n(rst_n), .d(qf_c[m]), .q(qf_q[m])
      );
    end

    treelut_adder_tree #(
      .N_OPS   (N_TREES),
      .W_IN    (W_TREE),
      .HAS_BIAS(MULTICLASS),
      .W_BIAS  (W_BIAS),
      .BIAS    (MULTICLASS ? int'(QB[n]) : 0),
      .P2      (P2),
      .W_SUM   (W_SUM)
    ) u_adder (
      .clk(clk),
      .ops(qf_q),
      .sum(sum)
    );

    assign score[n] = sum;
  end

  // ---- Binary class decision ---------------------------------------------
  if (MULTICLASS) begin : g_multi
    for (genvar n = 0; n < N_CLASSES; n++) begin : g_bias_check
      if ($signed(QB[n]) < 0) begin : g_neg
        $error("treelut_engine: multiclass bias qb_%0d = %0d must be made non-negative", n, $signed(QB[n]));
      end
    end
    assign y_hat = 1'b0;
  end else begin : g_binary
    treelut_binary_decision #(.W_SUM(W_SUM), .QB($signed(QB[0]))) u_decide (
      .sum  (g_class[0].sum),
      .y_hat(y_hat)
    );
  end

  // ---- Valid flag, same latency as the datapath ----------------------------
  treelut_pipe_reg #(.WIDTH(1), .STAGES(LATENCY), .RESETTABLE(1'b1)) u_valid (
    .clk(clk), .rst_n(rst_n), .d(in_valid), .q(out_valid)
  );


endmodule
