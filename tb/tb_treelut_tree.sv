// tb_treelut_tree -- checks the multiplexer realisation of a decision tree.
//
// u_fig is the module default, the 4-leaf tree with root k5, children k12 and
// k24 and leaves 0, 1, 1, 3. All eight combinations of (k5, k12, k24) are
// tried with random values on the other keys; the expected leaf is written out
// here: k5 ? (k12 ? 0 : 1) : (k24 ? 1 : 3). u_t1 / u_t2 are the two trees of the
// worked example, checked exhaustively over their six keys against their
// published leaves. u_syn is a synthetic depth-5 tree with early leaves,
// checked against a walk from its root.
module tb_treelut_tree;
  import treelut_pkg::*;

  int checks = 0, failures = 0;

  logic [24:0] k_fig;
  logic [2:0]  qf_fig;
  treelut_tree u_fig (.k(k_fig), .qf(qf_fig));

  logic [5:0] k_ex;
  logic [2:0] qf_t1, qf_t2;
  treelut_tree #(.MAX_DEPTH(2), .N_KEYS(6), .W_TREE(3), .TREE(treelut_example_pkg::NODES[0]))
    u_t1 (.k(k_ex), .qf(qf_t1));
  treelut_tree #(.MAX_DEPTH(2), .N_KEYS(6), .W_TREE(3), .TREE(treelut_example_pkg::NODES[1]))
    u_t2 (.k(k_ex), .qf(qf_t2));

  localparam int unsigned SD = 5, SK = 64, SWT = 4;
  localparam int unsigned SN = nodes_per_tree(SD);
  localparam tree_buf_t SBUF = synth_tree(32'hABCD_0123, 0, SD, SK, SWT);
  localparam node_t [0:SN-1] STREE = SBUF[0:SN-1];

  logic [SK-1:0]  k_syn;
  logic [SWT-1:0] qf_syn;
  treelut_tree #(.MAX_DEPTH(SD), .N_KEYS(SK), .W_TREE(SWT), .TREE(STREE))
    u_syn (.k(k_syn), .qf(qf_syn));

  function automatic int unsigned walk(input logic [SK-1:0] k, output bit early);
    int unsigned j = 0, lvl = 0;
    while (!STREE[j].is_leaf && lvl < SD) begin
      j = k[STREE[j].key] ? 2 * j + 1 : 2 * j + 2;
      lvl++;
    end
    early = (lvl < SD);
    return STREE[j].value;
  endfunction

  // Published example trees: tree 1 keys k3,k4,k5; tree 2 keys k1,k0,k2.
  function automatic int unsigned t1_expect(input logic [5:0] k);
    return k[3] ? (k[4] ? 7 : 2) : (k[5] ? 3 : 0);
  endfunction
  function automatic int unsigned t2_expect(input logic [5:0] k);
    return k[1] ? (k[0] ? 3 : 6) : (k[2] ? 0 : 4);
  endfunction

  int n_early = 0;

  initial begin
    for (int n = 0; n < 64; n++) begin
      k_fig = 25'($urandom);
      k_fig[5] = n[0]; k_fig[12] = n[1]; k_fig[24] = n[2];
      #1;
      checks++;
      if (qf_fig !== 3'(n[0] ? (n[1] ? 0 : 1) : (n[2] ? 1 : 3))) begin
        failures++;
        $display("tree k5/k12/k24=%b%b%b: qf %0d", n[0], n[1], n[2], qf_fig);
      end
    end
    for (int n = 0; n < 64; n++) begin
      k_ex = 6'(n);
      #1;
      checks += 2;
      if (qf_t1 !== 3'(t1_expect(k_ex))) begin
        failures++;
        $display("example tree 1 k=%b: qf %0d expected %0d", k_ex, qf_t1, t1_expect(k_ex));
      end
      if (qf_t2 !== 3'(t2_expect(k_ex))) begin
        failures++;
        $display("example tree 2 k=%b: qf %0d expected %0d", k_ex, qf_t2, t2_expect(k_ex));
      end
    end
    for (int n = 0; n < 4000; n++) begin
      bit early;
      int unsigned e;
      k_syn = {$urandom, $urandom};
      e = walk(k_syn, early);
      if (early) n_early++;
      #1;
      checks++;
      if (qf_syn !== SWT'(e)) begin
        failures++;
        if (failures < 10) $display("synthetic tree: qf %0d expected %0d", qf_syn, e);
      end
    end
    checks++;
    if (n_early == 0) begin
      failures++;
      $display("no path ending above the maximum depth was exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
