// treelut_adder_tree -- TreeLUT layer 3, the adder tree of one class.
//
// Sums the N_OPS quantized tree outputs of one class, plus the class bias when
// HAS_BIAS is set (multiclass models; in a binary model the bias becomes the
// decision threshold instead, see treelut_binary_decision). The operands are
// reduced pairwise: level l holds ceil(N/2^l) partial sums, an odd one out is
// passed up unchanged, and level D = clog2(N) holds the total (N = N_OPS + 1
// with the bias, N_OPS without).
//
// Pipelining: P2 register stages are spread evenly over the levels instead of
// one stage per level. Stage s = 1..P2 sits after level ceil(s*D/(P2+1)), so a
// tree of depth 6 with P2 = 1 is cut once, after level 3. With D = 0 (a single
// operand) the stages sit on the operand itself.
//
// Interface: ops[i] are the W_IN-bit unsigned tree outputs, sum the unsigned
// W_SUM-bit total. Timing: sum follows ops after exactly P2 clock edges; a new
// set of operands can enter on every clock (initiation interval 1).
//
// The structure (one adder tree per class, the bias as an addend, P2 stages
// spread evenly) follows the paper; the ceil() rounding of the stage positions,
// the unsigned bias and the all-levels-same-width arithmetic are this design's
// choices (synthesis drops the unused upper bits). Defaults: one class of the
// paper's main MNIST configuration, 30 trees of 3-bit leaves, p2 = 1.
module treelut_adder_tree
  import treelut_pkg::*;
#(
  parameter int unsigned N_OPS    = 30,
  parameter int unsigned W_IN     = 3,
  parameter bit          HAS_BIAS = 1'b1,
  parameter int unsigned W_BIAS   = 8,
  parameter int unsigned BIAS     = 0,
  parameter int unsigned P2       = 1,
  parameter int unsigned W_SUM    = sum_width(N_OPS, W_IN, HAS_BIAS, W_BIAS)
) (
  input  logic             clk,
  input  logic [W_IN-1:0]  ops [N_OPS],
  output logic [W_SUM-1:0] sum
);

  localparam int unsigned N_TOT = N_OPS + (HAS_BIAS ? 1 : 0);
  localparam int unsigned D     = $clog2(N_TOT);

  if (HAS_BIAS && BIAS >= (1 << W_BIAS)) begin : g_bad_bias
    $error("treelut_adder_tree: BIAS %0d does not fit W_BIAS bits", BIAS);
  end

  for (genvar l = 0; l <= D; l++) begin : g_lvl
    localparam int unsigned NL = ops_at_level(N_TOT, l);
    localparam int unsigned RL = regs_after_level(l, D, P2);
    logic [W_SUM-1:0] c [NL];  // combinational values of this level
    logic [W_SUM-1:0] v [NL];  // after the level's register stages (if any)

    if (l == 0) begin : g_leaves
      for (genvar i = 0; i < N_OPS; i++) begin : g_op
        assign c[i] = W_SUM'(ops[i]);
      end
      if (HAS_BIAS) begin : g_bias
        assign c[N_OPS] = W_SUM'(BIAS);
      end
    end else begin : g_add
      localparam int unsigned NP = ops_at_level(N_TOT, l - 1);
      for (genvar i = 0; i < NL; i++) begin : g_node
        if (2 * i + 1 < NP) begin : g_pair
          assign c[i] = g_lvl[l-1].v[2*i] + g_lvl[l-1].v[2*i+1];
        end else begin : g_pass
          assign c[i] = g_lvl[l-1].v[2*i];
        end
      end
    end

    for (genvar i = 0; i < NL; i++) begin : g_stage
      treelut_pipe_reg #(.WIDTH(W_SUM), .STAGES(RL), .RESETTABLE(1'b0)) u_reg (
        .clk  (clk),
        .rst_n(1'b1),
        .d    (c[i]),
        .q    (v[i])
      );
    end
  end

  assign sum = g_lvl[D].v[0];

endmodule
