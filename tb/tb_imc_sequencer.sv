// tb_imc_sequencer: unit test of the command sequencer against an abstract
// model of the tree written in the testbench. The model keeps a list of
// values with a "locked" bit each; on the result cycle of a max (min) pass it
// shows the max (min) of the unlocked values as the root word, during phase 1
// it counts the values equal to the root word, and on lock it locks them.
// Checked:
//  * control sequence and lengths: accept cycle with clr_perm (and key_we for
//    a search), one init cycle, W+2H-1 (search) or W+H-1 (other) run cycles,
//    then the result cycle with done;
//  * found / result taken from the root at that cycle and held afterwards;
//  * sort: the op order max, phase 1, max, ... (min for ascending), one report
//    per distinct value in order with its count, 2(W+H+1) cycles per round,
//    and the end when every link is locked (at once for an empty list);
//  * commands are ignored while busy.
module tb_imc_sequencer;
  import cayley_pkg::*;

  localparam int unsigned W  = 4;
  localparam int unsigned H  = 3;
  localparam int unsigned N  = 10;
  localparam int unsigned NW = $clog2(N + 1);

  logic          clk = 1'b0;
  logic          rst;
  logic          cmd_valid, cmd_ready;
  imc_cmd_e      cmd;
  logic [W-1:0]  key;
  logic          busy, done, found;
  logic [W-1:0]  result;
  logic          rep_valid;
  logic [W-1:0]  rep_value;
  logic [NW-1:0] rep_count;
  imc_op_e       op;
  logic          init, run, lock, clr_perm, key_we;
  logic [W-1:0]  key_data;
  logic          root_state;
  logic [W-1:0]  root_word;
  logic [NW-1:0] match_count;
  logic          all_locked;

  imc_sequencer #(.W(W), .H(H), .N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL at %0t: %s", $time, what); end
  endtask

  // ---------------------------------------------------------------------
  // abstract tree
  // ---------------------------------------------------------------------
  int unsigned lst [$];
  bit          lk  [$];
  logic [W-1:0] root_q;
  int          run_cnt;
  int          init_cnt;

  function automatic int unsigned extreme(input bit is_min);
    int unsigned m;
    m = is_min ? (1 << W) - 1 : 0;
    foreach (lst[i]) if (!lk[i]) m = is_min ? ((lst[i] < m) ? lst[i] : m) : ((lst[i] > m) ? lst[i] : m);
    return m;
  endfunction

  // recomputed just after each clock edge (the list is a queue, so the
  // status is derived here rather than in a combinational block)
  always @(posedge clk) begin
    #1;
    all_locked = 1'b1;
    foreach (lk[i]) if (!lk[i]) all_locked = 1'b0;
    match_count = '0;
    foreach (lst[i]) if (lst[i] == int'(root_q) && !lk[i]) match_count = match_count + NW'(1);
  end
  assign root_word = root_q;

  always @(posedge clk) begin
    if (init) init_cnt <= init_cnt + 1;
    if (run) run_cnt <= run_cnt + 1;
    if (key_we) root_q <= key_data;
    if (clr_perm) foreach (lk[i]) lk[i] = 0;
    if (run && (op == OP_MAX || op == OP_MIN)) root_q <= W'(extreme(op == OP_MIN));
    if (lock) foreach (lst[i]) if (lst[i] == int'(root_q)) lk[i] = 1;
  end

  // ---------------------------------------------------------------------
  // driver
  // ---------------------------------------------------------------------
  task automatic single(input imc_cmd_e c, input logic [W-1:0] k, input bit rs);
    int unsigned t;
    int          r0, i0;
    @(negedge clk);
    check(cmd_ready, "ready when idle");
    cmd_valid = 1; cmd = c; key = k; root_state = rs;
    #1;
    check(clr_perm && (key_we == (c == CMD_SEARCH)), "accept: clr_perm and key write");
    r0 = run_cnt; i0 = init_cnt;
    @(negedge clk);
    cmd_valid = 0;
    check(busy && !cmd_ready, "busy after accept");
    // a command while busy is ignored
    cmd_valid = 1; cmd = CMD_MAX;
    #1;
    check(!clr_perm && !key_we, "no acceptance while busy");
    t = 1;
    while (!done) begin @(negedge clk); cmd_valid = 0; t++; end
    check(t == ((c == CMD_SEARCH) ? W + 2 * H + 1 : W + H + 1),
          $sformatf("command %0d took %0d cycles", c, t));
    check(init_cnt - i0 == 1, "one init cycle");
    check(run_cnt - r0 == ((c == CMD_SEARCH) ? W + 2 * H - 1 : W + H - 1),
          $sformatf("run cycles %0d", run_cnt - r0));
    if (c == CMD_SEARCH) check(found == rs, "found taken from the root");
    else check(result == W'(extreme(c == CMD_MIN)), "result taken from the root");
    @(negedge clk);
    cmd_valid = 0;
    root_state = !rs;
    @(negedge clk);
    if (c == CMD_SEARCH) check(found == rs, "found held");
    else check(result == W'(extreme(c == CMD_MIN)), "result held");
  endtask

  task automatic sort(input bit asc);
    int unsigned cnt [1 << W];
    int unsigned ev [$];
    int unsigned ec [$];
    int          nrep;
    int unsigned last_t, t;
    imc_op_e     prev_op;
    foreach (cnt[v]) cnt[v] = 0;
    foreach (lst[i]) cnt[lst[i]]++;
    for (int v = 0; v < (1 << W); v++) begin
      int unsigned vv;
      vv = asc ? v : (1 << W) - 1 - v;
      if (cnt[vv] != 0) begin ev.push_back(vv); ec.push_back(cnt[vv]); end
    end
    @(negedge clk);
    cmd_valid = 1; cmd = asc ? CMD_SORT_ASC : CMD_SORT_DESC;
    @(negedge clk);
    cmd_valid = 0;
    nrep = 0; t = 0; last_t = 0;
    prev_op = OP_IDLE;
    while (!done) begin
      if (init) begin
        if (prev_op == OP_IDENT || prev_op == OP_IDLE)
          check(op == (asc ? OP_MIN : OP_MAX), "phase A op");
        else
          check(op == OP_IDENT, "phase B follows phase A");
        prev_op = op;
      end
      if (rep_valid) begin
        if (nrep < ev.size())
          check(rep_value == W'(ev[nrep]) && rep_count == NW'(ec[nrep]),
                $sformatf("report %0d: %0d x%0d expected %0d x%0d", nrep, rep_value,
                          rep_count, ev[nrep], ec[nrep]));
        if (nrep > 0) check(t - last_t == 2 * (W + H + 1), "round length");
        last_t = t;
        nrep++;
      end
      @(negedge clk);
      t++;
    end
    check(nrep == ev.size(), $sformatf("%0d reports, expected %0d", nrep, ev.size()));
  endtask

  initial begin
    rst = 1; cmd_valid = 0; cmd = CMD_SEARCH; key = '0; root_state = 0;
    root_q = '0; run_cnt = 0; init_cnt = 0; all_locked = 1; match_count = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    lst = '{14, 9, 6, 10, 14, 7, 11, 11, 10};
    lk  = '{0, 0, 0, 0, 0, 0, 0, 0, 0};
    single(CMD_SEARCH, 4'd9, 1);
    single(CMD_SEARCH, 4'd13, 0);
    single(CMD_MAX, 4'd0, 0);
    single(CMD_MIN, 4'd0, 0);
    sort(0);
    sort(1);
    for (int t = 0; t < 20; t++) begin
      int n;
      n = $urandom_range(N - 1);
      lst.delete(); lk.delete();
      for (int i = 0; i < n; i++) begin lst.push_back($urandom_range(15)); lk.push_back(0); end
      single(CMD_SEARCH, W'($urandom), 1'($urandom_range(1)));
      sort(t[0]);
    end
    lst.delete(); lk.delete();
    sort(0);
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
