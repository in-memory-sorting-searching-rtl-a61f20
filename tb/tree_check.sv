// tree_check: drives one cayley_tree of the given shape through random
// searches, phase 1 searches with lock, max and min, and compares the
// answers with a model of the list. Used by tb_cayley_tree; it counts its own
// checks and failures and raises done when finished.
module tree_check
  import cayley_pkg::*;
#(
  parameter int unsigned W      = 4,
  parameter int unsigned ETA    = 2,
  parameter int unsigned H      = 3,
  parameter int unsigned TRIALS = 20
) (
  input  logic clk,
  output logic done
);

  localparam int unsigned N  = num_nodes(ETA, H);
  localparam int unsigned AW = $clog2(N);

  logic          rst;
  logic          we;
  logic [AW-1:0] waddr;
  logic [W-1:0]  wdata;
  logic          wempty;
  imc_op_e       op;
  logic          init, run, lock, clr_perm;
  logic          root_state;
  logic [W-1:0]  root_word;
  logic [N-1:0]  match_vec, lm_perm_vec;

  cayley_tree #(.W(W), .ETA(ETA), .H(H)) dut (.*);

  int checks = 0;
  int failures = 0;
  int unsigned val [N];
  bit          emp [N];
  bit          locked [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (order %0d, %0d levels): %s", ETA, H, what);
    end
  endtask

  task automatic idle();
    we = 0; init = 0; run = 0; lock = 0; clr_perm = 0;
  endtask

  task automatic write(input int unsigned a, input int unsigned v, input bit e);
    @(negedge clk); idle(); we = 1; waddr = AW'(a); wdata = W'(v); wempty = e;
    @(negedge clk); idle();
  endtask

  task automatic pulse_init(input imc_op_e o);
    @(negedge clk); idle(); op = o; init = 1;
    @(negedge clk); idle();
  endtask

  task automatic run_steps(input int unsigned n);
    for (int i = 0; i < int'(n); i++) begin
      idle(); run = 1; @(negedge clk);
    end
    idle();
  endtask

  task automatic do_search(input int unsigned k);
    bit exp;
    exp = 0;
    for (int i = 1; i < int'(N); i++) if (!emp[i] && val[i] == k) exp = 1;
    write(0, k, 0);
    pulse_init(OP_SEARCH);
    run_steps(W + H - 1);
    check(root_state == 0, "search answer cannot be there yet");
    run_steps(H);
    check(root_state == exp, $sformatf("search %0d: %0d expected %0d", k, root_state, exp));
  endtask

  task automatic do_ident(input int unsigned k);
    write(0, k, 0);
    pulse_init(OP_IDENT);
    run_steps(W + H - 1);
    for (int i = 1; i < int'(N); i++)
      check(match_vec[i] == (!emp[i] && val[i] == k),
            $sformatf("node %0d match %0d (word %0d key %0d)", i, match_vec[i], val[i], k));
  endtask

  task automatic do_lock();
    @(negedge clk); idle(); lock = 1; @(negedge clk); idle();
    for (int i = 1; i < int'(N); i++) begin
      if (match_vec[i]) locked[i] = 1;
      check(lm_perm_vec[i] == (locked[i] || emp[i]), $sformatf("node %0d lm_perm", i));
    end
  endtask

  task automatic do_extreme(input bit is_min);
    int unsigned m;
    bit any;
    any = 0; m = is_min ? (1 << W) - 1 : 0;
    for (int i = 1; i < int'(N); i++)
      if (!emp[i] && !locked[i]) begin
        any = 1;
        if (is_min ? val[i] < m : val[i] > m) m = val[i];
      end
    pulse_init(is_min ? OP_MIN : OP_MAX);
    run_steps(W + H - 1);
    check(root_word == W'(m), $sformatf("%s: %0d expected %0d", is_min ? "min" : "max", root_word, m));
  endtask

  initial begin
    done = 0; rst = 1; idle(); op = OP_IDLE; waddr = '0; wdata = '0; wempty = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < int'(TRIALS); t++) begin
      for (int i = 1; i < int'(N); i++) begin
        val[i] = $urandom_range((1 << W) - 1);
        emp[i] = ($urandom_range(6) == 0);
        locked[i] = 0;
        write(i, val[i], emp[i]);
      end
      do_search($urandom_range((1 << W) - 1));
      do_search(val[1 + $urandom_range(N - 2)]);
      do_extreme(0);
      do_extreme(1);
      // phase 1 + lock of one value, then max/min without it
      do_ident(val[1 + $urandom_range(N - 2)]);
      do_lock();
      do_extreme(t[0]);
      // words unchanged: every non-empty node finds its own value
      for (int i = 1; i < int'(N); i += 3) do_ident(val[i]);
      @(negedge clk); idle(); clr_perm = 1; @(negedge clk); idle();
      for (int i = 1; i < int'(N); i++) locked[i] = 0;
    end
    done = 1;
  end

endmodule
