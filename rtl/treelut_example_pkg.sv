// treelut_example_pkg -- the small worked-example model used throughout the
// TreeLUT description, written out as TreeLUT parameters.
//
// Binary classifier over five 4-bit features x0..x4 with two depth-2 trees:
//   tree 1: x2 <= 3 ? (x3 <= 8 ? 7 : 2) : (x4 <= 0 ? 3 : 0)
//   tree 2: x0 <= 7 ? (x0 <= 2 ? 3 : 6) : (x1 <= 4 ? 0 : 4)
// Leaves are quantized to w_tree = 3 bits and the quantized bias is qb = -5.
// (Float leaves before quantization: tree 1: 2.0, -0.1, 0.5, -0.7; tree 2:
// -0.4, 0.8, -1.4, 0.0; after shifting each tree's minimum to 0 and scaling by
// 7/2.7 they round to the values above.) The six unique comparisons are the
// keys k0..k5: x0<=2, x0<=7, x1<=4, x2<=3, x3<=8, x4<=0.
// For the input X = [2, 15, 4, 1, 5] tree 1 gives 0 and tree 2 gives 3, so the
// bias-free sum is 3, QF = 3 - 5 = -2 < 0 and the predicted class is 0.
//
// FIG6_TREE is the separate 4-leaf tree used to explain the multiplexer
// realisation of a tree: root k5, True child k12, False child k24, leaves
// 0, 1, 1, 3 from left to right.
package treelut_example_pkg;
  import treelut_pkg::*;

  localparam int unsigned N_CLASSES  = 1;
  localparam int unsigned N_TREES    = 2;
  localparam int unsigned MAX_DEPTH  = 2;
  localparam int unsigned N_FEATURES = 5;
  localparam int unsigned W_FEATURE  = 4;
  localparam int unsigned W_TREE     = 3;
  localparam int unsigned W_BIAS     = 4;
  localparam int unsigned N_KEYS     = 6;
  localparam int unsigned N_NODES    = 7;

  localparam key_t [0:N_KEYS-1] KEYS = '{
    '{feature: 16'd0, threshold: 16'd2},   // k0
    '{feature: 16'd0, threshold: 16'd7},   // k1
    '{feature: 16'd1, threshold: 16'd4},   // k2
    '{feature: 16'd2, threshold: 16'd3},   // k3
    '{feature: 16'd3, threshold: 16'd8},   // k4
    '{feature: 16'd4, threshold: 16'd0}};  // k5

  localparam node_t [0:N_TREES-1][0:N_NODES-1] NODES = '{
    '{'{is_leaf: 1'b0, key: 16'd3, value: 8'd0},
      '{is_leaf: 1'b0, key: 16'd4, value: 8'd0},
      '{is_leaf: 1'b0, key: 16'd5, value: 8'd0},
      '{is_leaf: 1'b1, key: 16'd0, value: 8'd7},
      '{is_leaf: 1'b1, key: 16'd0, value: 8'd2},
      '{is_leaf: 1'b1, key: 16'd0, value: 8'd3},
      '{is_leaf: 1'b1, key: 16'd0, value: 8'd0}},
    '{'{is_leaf: 1'b0, key: 16'd1, value: 8'd0},
      '{is_leaf: 1'b0, key: 16'd0, value: 8'd0},
      '{is_leaf: 1'b0, key: 16'd2, value: 8'd0},
      '{is_leaf: 1'b1, key: 16'd0, value: 8'd3},
      '{is_leaf: 1'b1, key: 16'd0, value: 8'd6},
      '{is_leaf: 1'b1, key: 16'd0, value: 8'd0},
      '{is_leaf: 1'b1, key: 16'd0, value: 8'd4}}};

  localparam logic [0:N_CLASSES-1][31:0] QB = '{-32'sd5};

  localparam logic [W_FEATURE-1:0] EXAMPLE_X [N_FEATURES] =
    '{4'd2, 4'd15, 4'd4, 4'd1, 4'd5};

  localparam node_t [0:N_NODES-1] FIG6_TREE = '{
    '{is_leaf: 1'b0, key: 16'd5,  value: 8'd0},
    '{is_leaf: 1'b0, key: 16'd12, value: 8'd0},
    '{is_leaf: 1'b0, key: 16'd24, value: 8'd0},
    '{is_leaf: 1'b1, key: 16'd0,  value: 8'd0},
    '{is_leaf: 1'b1, key: 16'd0,  value: 8'd1},
    '{is_leaf: 1'b1, key: 16'd0,  value: 8'd1},
    '{is_leaf: 1'b1, key: 16'd0,  value: 8'd3}};

endpackage
