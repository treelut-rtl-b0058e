// treelut_binary_decision -- class decision of a binary TreeLUT classifier.
//
// A binary model predicts class 1 when qb + sum(qf_m) >= 0, where qb is the
// quantized bias (usually negative) and qf_m the quantized tree outputs. Rather
// than adding the constant qb in the adder tree, the bias is moved to the other
// side of the inequality: the bias-free sum is compared with the constant -qb.
// If qb >= 0 every input is class 1 and the comparator folds away.
//
// Interface: sum is the unsigned W_SUM-bit output of the adder tree; y_hat is
// the predicted class. Timing: combinational, placed right after the last
// adder-tree level. Moving qb into the threshold follows the paper's text; the
// default QB = -5 is the bias of its worked example.
module treelut_binary_decision #(
  parameter int unsigned W_SUM = 4,
  parameter int          QB    = -5
) (
  input  logic [W_SUM-1:0] sum,
  output logic             y_hat
);

  localparam longint THRESH = -longint'(QB);

  if (THRESH <= 0) begin : g_always_one
    assign y_hat = 1'b1;
  end else if (THRESH >= (longint'(1) << W_SUM)) begin : g_always_zero
    assign y_hat = 1'b0;
  end else begin : g_compare
    localparam logic [W_SUM-1:0] T = W_SUM'(THRESH);
    assign y_hat = (sum >= T);
  end

endmodule
