// tb_treelut_pipe_reg -- checks the pipeline register runs.
//
// Three instances, 0 (a wire), 1 and 3 stages, all fed the same random word
// on every clock; each output must equal the input of exactly STAGES clocks
// earlier. The resettable 3-stage instance must read 0 during reset and for
// its first three clocks after it, before the first real word arrives.
module tb_treelut_pipe_reg;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [11:0] d, q0, q1, q3, qr;
  treelut_pipe_reg #(.WIDTH(12), .STAGES(0)) u_s0 (.clk, .rst_n, .d, .q(q0));
  treelut_pipe_reg #(.WIDTH(12), .STAGES(1)) u_s1 (.clk, .rst_n, .d, .q(q1));
  treelut_pipe_reg #(.WIDTH(12), .STAGES(3)) u_s3 (.clk, .rst_n, .d, .q(q3));
  treelut_pipe_reg #(.WIDTH(12), .STAGES(3), .RESETTABLE(1'b1)) u_r3 (.clk, .rst_n, .d, .q(qr));

  logic [11:0] hist [$];   // hist[0] = newest word already clocked in

  task automatic check(input string what, input logic [11:0] got, input logic [11:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    d = 12'h0;
    repeat (2) @(negedge clk);
    check("reset value", qr, 12'h0);
    rst_n = 1'b1;
    d = 12'hA5A;
    for (int n = 0; n < 400; n++) begin
      @(posedge clk);
      hist.push_front(d);
      @(negedge clk);
      d = 12'($urandom);
      #1;
      check("0 stages", q0, d);
      check("1 stage", q1, hist[0]);
      if (hist.size() >= 3) begin
        check("3 stages", q3, hist[2]);
        check("3 stages, resettable", qr, hist[2]);
      end else begin
        check("3 stages, resettable, still empty", qr, 12'h0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
