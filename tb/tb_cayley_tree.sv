// tb_cayley_tree: test of the tree with the testbench as sequencer. Two
// shapes are built: order 2 with 3 levels (10 nodes, the default) and order 3
// with 3 levels (17 nodes); a third, order 2 with 4 levels, only has its node
// count checked against the paper's figure of 22 nodes.
// For random lists (with empty nodes) it checks, against a plain model:
//  * search: root state after W+2H-1 run steps equals "key in list", and is 0
//    at step W+H-1 (no answer can have arrived yet from the leaves);
//  * search phase 1: the match vector equals (word == key) per node, lock
//    copies it into lm_perm;
//  * max / min after W+H-1 run steps: the root word is the max (min) of the
//    nodes not locked; the words are unchanged afterwards (a phase 1 search
//    still finds every node's own value).
module tb_cayley_tree;
  import cayley_pkg::*;

  localparam int unsigned W = 4;

  logic    clk = 1'b0;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // node count of the paper's Figure 1(a): order 2, height 4 -> 22 nodes
  localparam int unsigned N22 = num_nodes(2, 4);

  logic done2, done3;

  tree_check #(.W(W), .ETA(2), .H(3), .TRIALS(60)) u_t2 (.clk, .done(done2));
  tree_check #(.W(W), .ETA(3), .H(3), .TRIALS(30)) u_t3 (.clk, .done(done3));

  initial begin
    wait (done2 && done3);
    check(N22 == 22, $sformatf("order 2, 4 levels: %0d nodes, expected 22", N22));
    check(num_nodes(2, 3) == 10, "order 2, 3 levels: 10 nodes");
    checks   += u_t2.checks + u_t3.checks;
    failures += u_t2.failures + u_t3.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
