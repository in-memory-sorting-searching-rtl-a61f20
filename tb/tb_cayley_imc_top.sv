// tb_cayley_imc_top: end-to-end test of the Cayley-tree platform at its
// default size (order 2, 3 levels, 4-bit words: a root and 9 element nodes).
//
// It loads lists into the nodes, issues search, max, min and both sorts, and
// compares every answer with a plain software model of the list (linear scan
// for search/max/min, counting sort for the sorted report). It also checks the
// latencies: search W+2H+1 cycles, max/min W+H+1 cycles, and 2(W+H+1) cycles
// between consecutive sort reports. The lists are the paper's two worked
// examples followed by random lists with empty nodes and repeated values.
// Mechanisms that must occur at least once: hit, miss (including a missing key
// whose last bit is 1), a link disabled in the root during max, a repeated
// value in a sort report, an empty node, an ascending sort, and a sort of a
// tree with no elements at all.
module tb_cayley_imc_top;
  import cayley_pkg::*;

  localparam int unsigned W   = 4;
  localparam int unsigned ETA = 2;
  localparam int unsigned H   = 3;
  localparam int unsigned N   = num_nodes(ETA, H);
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned NW  = $clog2(N + 1);

  logic          clk = 1'b0;
  logic          rst;
  logic          we;
  logic [AW-1:0] waddr;
  logic [W-1:0]  wdata;
  logic          wempty;
  logic          cmd_valid;
  logic          cmd_ready;
  imc_cmd_e      cmd;
  logic [W-1:0]  key;
  logic          busy, done, found;
  logic [W-1:0]  result;
  logic          rep_valid;
  logic [W-1:0]  rep_value;
  logic [NW-1:0] rep_count;

  cayley_imc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_hit = 0, n_miss = 0, n_miss_lsb1 = 0, n_link_dis = 0, n_dup = 0;
  int n_empty = 0, n_asc = 0, n_all_empty = 0;

  // software copy of the list
  int unsigned val [N];
  bit          emp [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load(input int unsigned idx, input int unsigned v, input bit e);
    @(negedge clk);
    we = 1'b1; waddr = AW'(idx); wdata = W'(v); wempty = e;
    @(negedge clk);
    we = 1'b0;
    val[idx] = v; emp[idx] = e;
    if (e) n_empty++;
  endtask

  // issue a command, return the number of cycles from acceptance to done
  task automatic issue(input imc_cmd_e c, input int unsigned k, output int unsigned lat);
    int unsigned t0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = c; key = W'(k);
    @(posedge clk);
    t0 = cycle;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!done) @(negedge clk);
    lat = cycle - t0;
  endtask

  task automatic do_search(input int unsigned k);
    int unsigned lat;
    bit exp;
    exp = 0;
    for (int i = 1; i < int'(N); i++) if (!emp[i] && val[i] == k) exp = 1;
    issue(CMD_SEARCH, k, lat);
    check(found == exp, $sformatf("search %0d: found=%0d expected %0d", k, found, exp));
    check(lat == W + 2 * H + 1, $sformatf("search latency %0d expected %0d", lat, W + 2 * H + 1));
    if (exp) n_hit++; else begin n_miss++; if (k[0]) n_miss_lsb1++; end
  endtask

  task automatic do_extreme(input bit is_min);
    int unsigned lat;
    int unsigned exp;
    bit any;
    any = 0; exp = is_min ? (1 << W) - 1 : 0;
    for (int i = 1; i < int'(N); i++)
      if (!emp[i]) begin
        any = 1;
        if (is_min ? val[i] < exp : val[i] > exp) exp = val[i];
      end
    issue(is_min ? CMD_MIN : CMD_MAX, 0, lat);
    check(result == W'(exp), $sformatf("%s: got %0d expected %0d", is_min ? "min" : "max", result, exp));
    check(lat == W + H + 1, $sformatf("max/min latency %0d expected %0d", lat, W + H + 1));
    if (dut.u_tree.u_root.lc != '0) n_link_dis++;
  endtask

  task automatic do_sort(input bit asc);
    int unsigned cnt [1 << W];
    int unsigned exp_v [$];
    int unsigned exp_c [$];
    int unsigned got_v [$];
    int unsigned got_c [$];
    int unsigned rep_t [$];
    int unsigned t0;
    foreach (cnt[v]) cnt[v] = 0;
    for (int i = 1; i < int'(N); i++) if (!emp[i]) cnt[val[i]]++;
    for (int v = 0; v < (1 << W); v++) begin
      int unsigned vv;
      vv = asc ? v : (1 << W) - 1 - v;
      if (cnt[vv] != 0) begin exp_v.push_back(vv); exp_c.push_back(cnt[vv]); end
    end
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = asc ? CMD_SORT_ASC : CMD_SORT_DESC;
    @(posedge clk);
    t0 = cycle;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!done) begin
      if (rep_valid) begin
        got_v.push_back(int'(rep_value)); got_c.push_back(int'(rep_count)); rep_t.push_back(cycle);
        if (rep_count > 1) n_dup++;
      end
      @(negedge clk);
    end
    check(got_v.size() == exp_v.size(),
          $sformatf("sort: %0d reports, expected %0d", got_v.size(), exp_v.size()));
    for (int i = 0; i < exp_v.size() && i < got_v.size(); i++) begin
      check(got_v[i] == exp_v[i] && got_c[i] == exp_c[i],
            $sformatf("sort report %0d: %0d x%0d expected %0d x%0d",
                      i, got_v[i], got_c[i], exp_v[i], exp_c[i]));
      if (i > 0)
        check(rep_t[i] - rep_t[i-1] == 2 * (W + H + 1),
              $sformatf("sort round took %0d cycles, expected %0d",
                        rep_t[i] - rep_t[i-1], 2 * (W + H + 1)));
    end
    check(cycle - t0 == 2 * (W + H + 1) * exp_v.size() + 1,
          $sformatf("sort took %0d cycles, expected %0d", cycle - t0,
                    2 * (W + H + 1) * exp_v.size() + 1));
    if (asc) n_asc++;
    if (exp_v.size() == 0) n_all_empty++;
  endtask

  // paper's examples
  int unsigned search_list [9] = '{14, 9, 6, 10, 14, 7, 11, 11, 10};
  int unsigned max_list    [8] = '{14, 9, 5, 14, 7, 11, 10, 10};

  initial begin
    rst = 1'b1; we = 1'b0; waddr = '0; wdata = '0; wempty = 1'b0;
    cmd_valid = 1'b0; cmd = CMD_SEARCH; key = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // search example of the paper: key 9 is in the list
    for (int i = 0; i < 9; i++) load(i + 1, search_list[i], 1'b0);
    do_search(9);
    do_search(13);   // absent, last bit 1
    do_search(5);    // absent
    do_search(6);
    do_extreme(1'b0);
    do_extreme(1'b1);
    do_sort(1'b0);

    // max example of the paper: eight elements, one empty node
    for (int i = 0; i < 8; i++) load(i + 1, max_list[i], 1'b0);
    load(9, 0, 1'b1);
    do_extreme(1'b0);
    do_extreme(1'b1);
    do_sort(1'b0);
    do_sort(1'b1);
    do_search(14);

    // random lists
    for (int t = 0; t < 40; t++) begin
      for (int i = 1; i < int'(N); i++)
        load(i, $urandom_range((1 << W) - 1), ($urandom_range(5) == 0));
      do_search($urandom_range((1 << W) - 1));
      do_search(val[1 + $urandom_range(N - 2)]);
      do_extreme(1'b0);
      do_extreme(1'b1);
      do_sort(t[0]);
    end

    // nothing loaded
    for (int i = 1; i < int'(N); i++) load(i, 0, 1'b1);
    do_sort(1'b0);
    do_search(0);

    check(n_hit > 0, "no search hit");
    check(n_miss > 0, "no search miss");
    check(n_miss_lsb1 > 0, "no miss with key LSB 1");
    check(n_link_dis > 0, "no link disabled in the root");
    check(n_dup > 0, "no repeated value in a sort");
    check(n_empty > 0, "no empty node");
    check(n_asc > 0, "no ascending sort");
    check(n_all_empty > 0, "no sort of an empty tree");
    $display("mechanisms: hit=%0d miss=%0d miss_lsb1=%0d link_disable=%0d dup=%0d empty=%0d asc=%0d all_empty=%0d",
             n_hit, n_miss, n_miss_lsb1, n_link_dis, n_dup, n_empty, n_asc, n_all_empty);
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
