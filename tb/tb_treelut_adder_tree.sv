// tb_treelut_adder_tree -- checks the pipelined adder trees.
//
// u_def: module defaults (30 operands of 3 bits plus a bias, p2 = 1; depth 5,
//        one stage after level 3), here with bias 77;
// u_nb:  7 operands, no bias, p2 = 0 (combinational);
// u_deep: 13 operands of 4 bits plus bias 5, p2 = 3;
// u_one: a single operand with p2 = 2 (stages on the operand itself).
// New random operands enter on every clock; each sum must appear exactly p2
// clocks later and equal the sum worked out here.
module tb_treelut_adder_tree;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [2:0] a30 [30];
  logic [2:0] a7  [7];
  logic [3:0] a13 [13];
  logic [5:0] a1  [1];
  // 30*7+255 = 465, 7*7 = 49, 13*15+63 = 258, 1*63 = 63
  localparam int W30 = 9, W7 = 6, W13 = 9, W1 = 6;
  logic [W30-1:0] s30;
  logic [W7-1:0]  s7;
  logic [W13-1:0] s13;
  logic [W1-1:0]  s1;

  treelut_adder_tree #(.BIAS(77)) u_def (.clk, .ops(a30), .sum(s30));
  treelut_adder_tree #(.N_OPS(7), .W_IN(3), .HAS_BIAS(1'b0), .P2(0)) u_nb (.clk, .ops(a7), .sum(s7));
  treelut_adder_tree #(.N_OPS(13), .W_IN(4), .W_BIAS(6), .BIAS(5), .P2(3)) u_deep (.clk, .ops(a13), .sum(s13));
  treelut_adder_tree #(.N_OPS(1), .W_IN(6), .HAS_BIAS(1'b0), .P2(2)) u_one (.clk, .ops(a1), .sum(s1));

  int h30 [$], h13 [$], h1 [$];  // expected sums, newest first

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int sum30();
    int s = 77;
    foreach (a30[i]) s += a30[i];
    return s;
  endfunction

  initial begin
    for (int n = 0; n < 500; n++) begin
      int e7;
      @(negedge clk);
      foreach (a30[i]) a30[i] = (n % 50 == 0) ? 3'd7 : 3'($urandom);
      foreach (a7[i])  a7[i]  = 3'($urandom);
      foreach (a13[i]) a13[i] = (n % 50 == 1) ? 4'd15 : 4'($urandom);
      a1[0] = 6'($urandom);
      #1;
      e7 = 0;
      foreach (a7[i]) e7 += a7[i];
      check("7 ops, no bias, p2=0", s7, e7);
      if (h30.size() >= 1) check("30 ops + bias, p2=1", s30, h30[0]);
      if (h13.size() >= 3) check("13 ops + bias, p2=3", s13, h13[2]);
      if (h1.size()  >= 2) check("1 op, p2=2", s1, h1[1]);
      @(posedge clk);
      h30.push_front(sum30());
      e7 = 5;
      foreach (a13[i]) e7 += a13[i];
      h13.push_front(e7);
      h1.push_front(a1[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
