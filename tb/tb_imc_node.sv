// tb_imc_node: unit test of one intermediate node and one leaf of the tree.
// The testbench plays the neighbours: it drives the parent's state bit and the
// children's state bits, and compares the node's state, match and lm_perm with
// a step-by-step model of the paper's procedures written here.
//  * search: wait, initiate, key MSB first; state must echo the parent one
//    step later, match must equal (key == word) after W bits; phase 2 must
//    send match once, ignore the children for two steps, then OR them in.
//  * search phase 1 only (OP_IDENT): match held, state held after the key.
//  * max / min: the children send an initiate, then W bits each; the node's
//    state must be the OR (AND) of the enabled inputs, and an input whose bit
//    differs must stay ignored. The word must come back unrotated (a search
//    for it must match afterwards).
//  * lock / clr_perm / empty: a locked node must drop out of max and min.
module tb_imc_node;
  import cayley_pkg::*;

  localparam int unsigned W   = 4;
  localparam int unsigned ETA = 2;

  logic           clk = 1'b0;
  logic           rst;
  logic           we;
  logic [W-1:0]   wdata;
  logic           wempty;
  imc_op_e        op;
  logic           init, run, lock, clr_perm;
  logic           par_state;
  logic [ETA-1:0] child_state;
  logic           st_i, match_i, lmp_i;   // intermediate node
  logic           st_l, match_l, lmp_l;   // leaf

  imc_node #(.W(W), .ETA(ETA), .IS_LEAF(1'b0)) dut (
    .clk, .rst, .we, .wdata, .wempty, .op, .init, .run, .lock, .clr_perm,
    .par_state, .child_state, .state(st_i), .match(match_i), .lm_perm(lmp_i));

  imc_node #(.W(W), .ETA(ETA), .IS_LEAF(1'b1)) leaf (
    .clk, .rst, .we, .wdata, .wempty, .op, .init, .run, .lock, .clr_perm,
    .par_state, .child_state, .state(st_l), .match(match_l), .lm_perm(lmp_l));

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle();
    we = 0; init = 0; run = 0; lock = 0; clr_perm = 0;
  endtask

  task automatic load(input logic [W-1:0] v, input bit e);
    @(negedge clk); idle(); we = 1; wdata = v; wempty = e;
    @(negedge clk); idle();
  endtask

  task automatic do_init(input imc_op_e o);
    @(negedge clk); idle(); op = o; init = 1;
    @(negedge clk); idle();
  endtask

  // one run step with the given neighbour bits; sampled after the edge
  task automatic step(input logic p, input logic [ETA-1:0] c);
    idle(); run = 1; par_state = p; child_state = c;
    @(negedge clk); idle();
  endtask

  // search (or phase 1 only) of key k in both nodes, word v
  task automatic t_search(input logic [W-1:0] v, input logic [W-1:0] k, input bit ident,
                          input int unsigned wait_steps, input bit do_load = 1'b1);
    bit exp;
    logic [ETA-1:0] kids;
    exp = (v == k);
    if (do_load) load(v, 0);    // the leaf gets the same word
    do_init(ident ? OP_IDENT : OP_SEARCH);
    check(match_i == 1 && st_i == 0, "search init flags");
    for (int i = 0; i < int'(wait_steps); i++) begin
      step(0, 2'b11);
      check(st_i == 0, "state stays 0 before the initiate");
    end
    step(1, 2'b11);                               // initiate
    check(st_i == 1, "initiate forwarded");
    for (int b = W - 1; b >= 0; b--) begin
      step(k[b], 2'b11);
      check(st_i == k[b] && st_l == k[b], "key bit forwarded");
    end
    check(match_i == exp && match_l == exp,
          $sformatf("match after key: %0d/%0d expected %0d", match_i, match_l, exp));
    if (ident) begin
      for (int i = 0; i < 4; i++) begin
        step(0, 2'b11);
        check(match_i == exp && st_i == k[0], "phase 1 only: flags held");
      end
    end else begin
      step(0, 2'b11);                             // step W+1: match goes up
      check(st_i == exp && st_l == exp && match_i == 0, "phase 2 first step sends match");
      step(0, 2'b11);                             // step W+2: children ignored
      check(st_i == 0, "children ignored before they turn upward");
      for (int i = 0; i < 6; i++) begin
        kids = ETA'($urandom);
        step(0, kids);
        check(st_i == |kids, "phase 2: OR of children");
        check(st_l == 0, "leaf quiet after sending its match");
      end
    end
  endtask

  // max or min with children words a, b and own word v (lm permanently set if locked)
  task automatic t_extreme(input bit is_min, input logic [W-1:0] v, input logic [W-1:0] a,
                           input logic [W-1:0] b, input bit locked);
    bit en [3];
    bit bits [3];
    bit r;
    logic [W-1:0] got;
    int ls;
    do_init(is_min ? OP_MIN : OP_MAX);
    check(st_i == 0 && st_l == 1, "max init: leaf shows the initiate");
    step(0, 2'b00);
    check(st_i == 0, "no start without initiate");
    step(0, 2'b11);                               // initiate from the children
    check(st_i == 1, "initiate passed upward");
    en[0] = 1; en[1] = 1; en[2] = !locked;
    for (int k = W - 1; k >= 0; k--) begin
      bits[0] = a[k]; bits[1] = b[k]; bits[2] = v[k];
      r = is_min;
      for (int j = 0; j < 3; j++)
        if (en[j]) r = is_min ? (r & bits[j]) : (r | bits[j]);
      step(0, {b[k], a[k]});
      check(st_i == r, $sformatf("%s step bit %0d: state %0d expected %0d",
                                 is_min ? "min" : "max", k, st_i, r));
      // the leaf started sending at run step 0, two steps before this loop
      ls = (W - 1 - k) + 2;
      check(st_l == (locked ? is_min : (ls < int'(W) ? v[W-1-ls] : v[0])),
            "leaf sends its bits MSB first (or the neutral bit)");
      got[k] = st_i;
      for (int j = 0; j < 3; j++) if (en[j] && bits[j] != r) en[j] = 0;
    end
    begin
      logic [W-1:0] m;
      if (is_min) begin
        m = (a < b) ? a : b;
        if (!locked && v < m) m = v;
      end else begin
        m = (a > b) ? a : b;
        if (!locked && v > m) m = v;
      end
      check(got == m, $sformatf("%s of subtree: %0d expected %0d", is_min ? "min" : "max", got, m));
    end
    // extra steps: state holds
    step(0, 2'b11);
    check(st_i == got[0], "state held after W bits");
  endtask

  initial begin
    rst = 1; idle(); op = OP_IDLE; par_state = 0; child_state = '0; wdata = '0; wempty = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    check(lmp_i == 1, "reset: empty node is locked");

    // fixed cases: the paper's search example node holding 9, key 9 and 13
    t_search(4'd9, 4'd9, 0, 2);
    t_search(4'd9, 4'd13, 0, 0);
    t_search(4'd5, 4'd5, 1, 1);
    for (int t = 0; t < 60; t++) begin
      logic [W-1:0] v, k;
      v = W'($urandom);
      k = ($urandom_range(1) == 0) ? v : W'($urandom);
      t_search(v, k, t[0], $urandom_range(3));
    end

    // max / min, word restored afterwards
    for (int t = 0; t < 60; t++) begin
      logic [W-1:0] v, a, b;
      v = W'($urandom); a = W'($urandom); b = W'($urandom);
      load(v, 0);
      t_extreme(t[0], v, a, b, 0);
      t_search(v, v, 1, 0, 1'b0);  // word back in place: matches itself, no reload
    end

    // lock after a matching phase 1, then the node's word drops out
    load(4'd15, 0);
    t_search(4'd15, 4'd15, 1, 0);
    @(negedge clk); idle(); lock = 1; @(negedge clk); idle();
    check(lmp_i == 1 && lmp_l == 1, "lock sets lm_perm on a match");
    t_extreme(0, 4'd15, 4'd3, 4'd6, 1);
    t_extreme(1, 4'd15, 4'd3, 4'd6, 1);
    // a non-matching node is not locked
    @(negedge clk); idle(); clr_perm = 1; @(negedge clk); idle();
    check(lmp_i == 0, "clr_perm re-enables a loaded node");
    t_search(4'd15, 4'd14, 1, 0);
    @(negedge clk); idle(); lock = 1; @(negedge clk); idle();
    check(lmp_i == 0, "lock ignores a node without match");
    // empty node: never matches, never counts
    load(4'd7, 1);
    check(lmp_i == 1, "empty node loaded locked");
    do_init(OP_SEARCH);
    check(match_i == 0, "empty node starts without match");
    @(negedge clk); idle(); clr_perm = 1; @(negedge clk); idle();
    check(lmp_i == 1, "clr_perm keeps an empty node locked");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
