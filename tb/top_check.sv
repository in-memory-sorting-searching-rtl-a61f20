// top_check: drives one cayley_imc_top of the given size through random
// lists (with repeated values and empty nodes) and checks search, max, min
// and both sorts against a model of the list, together with the latencies
// W+2H+1 (search), W+H+1 (max/min) and 2(W+H+1) per sort round. Values are
// held as 64-bit numbers, so any W up to 64 can be checked. Used by
// tb_cayley_imc_sizes; it counts its own checks and failures and raises done
// when finished.
module top_check
  import cayley_pkg::*;
#(
  parameter int unsigned W      = 8,
  parameter int unsigned ETA    = 2,
  parameter int unsigned H      = 3,
  parameter int unsigned TRIALS = 5
) (
  input  logic clk,
  output logic done_all
);

  localparam int unsigned N  = num_nodes(ETA, H);
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned NW = $clog2(N + 1);

  logic          rst;
  logic          we;
  logic [AW-1:0] waddr;
  logic [W-1:0]  wdata;
  logic          wempty;
  logic          cmd_valid, cmd_ready;
  imc_cmd_e      cmd;
  logic [W-1:0]  key;
  logic          busy, done, found;
  logic [W-1:0]  result;
  logic          rep_valid;
  logic [W-1:0]  rep_value;
  logic [NW-1:0] rep_count;

  cayley_imc_top #(.W(W), .ETA(ETA), .H(H)) dut (.*);

  int checks = 0;
  int failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [63:0] val [N];
  bit          emp [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (W=%0d, order %0d, %0d levels): %s", W, ETA, H, what);
    end
  endtask

  function automatic logic [63:0] rnd();
    return 64'({$urandom, $urandom}) & ((W >= 64) ? '1 : ((64'd1 << W) - 64'd1));
  endfunction

  task automatic load(input int unsigned idx, input logic [63:0] v, input bit e);
    @(negedge clk);
    we = 1'b1; waddr = AW'(idx); wdata = W'(v); wempty = e;
    @(negedge clk);
    we = 1'b0;
    val[idx] = v; emp[idx] = e;
  endtask

  task automatic issue(input imc_cmd_e c, input logic [63:0] k, output int unsigned lat);
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

  task automatic do_search(input logic [63:0] k);
    int unsigned lat;
    bit exp;
    exp = 0;
    for (int i = 1; i < int'(N); i++) if (!emp[i] && val[i] == k) exp = 1;
    issue(CMD_SEARCH, k, lat);
    check(found == exp, $sformatf("search %0h: found=%0d expected %0d", k, found, exp));
    check(lat == W + 2 * H + 1, $sformatf("search latency %0d", lat));
  endtask

  task automatic do_extreme(input bit is_min);
    int unsigned lat;
    logic [63:0] exp;
    bit any;
    any = 0; exp = 0;
    for (int i = 1; i < int'(N); i++)
      if (!emp[i]) begin
        if (!any || (is_min ? val[i] < exp : val[i] > exp)) exp = val[i];
        any = 1;
      end
    if (!any) exp = is_min ? 64'(W'('1)) : 64'd0;
    issue(is_min ? CMD_MIN : CMD_MAX, 0, lat);
    check(64'(result) == exp, $sformatf("%s: got %0h expected %0h", is_min ? "min" : "max", result, exp));
    check(lat == W + H + 1, $sformatf("max/min latency %0d", lat));
  endtask

  task automatic do_sort(input bit asc);
    logic [63:0] vals [$];
    logic [63:0] exp_v [$];
    int unsigned exp_c [$];
    int          nrep;
    int unsigned t0, tl;
    for (int i = 1; i < int'(N); i++) if (!emp[i]) vals.push_back(val[i]);
    vals.sort();
    if (!asc) vals.reverse();
    foreach (vals[i]) begin
      if (exp_v.size() != 0 && exp_v[exp_v.size() - 1] == vals[i]) exp_c[exp_c.size() - 1]++;
      else begin exp_v.push_back(vals[i]); exp_c.push_back(1); end
    end
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd = asc ? CMD_SORT_ASC : CMD_SORT_DESC;
    @(posedge clk);
    t0 = cycle;
    @(negedge clk);
    cmd_valid = 1'b0;
    nrep = 0; tl = 0;
    while (!done) begin
      if (rep_valid) begin
        if (nrep < exp_v.size())
          check(64'(rep_value) == exp_v[nrep] && int'(rep_count) == int'(exp_c[nrep]),
                $sformatf("sort report %0d: %0h x%0d expected %0h x%0d", nrep, rep_value,
                          rep_count, exp_v[nrep], exp_c[nrep]));
        if (nrep > 0) check(cycle - tl == 2 * (W + H + 1), "sort round length");
        tl = cycle;
        nrep++;
      end
      @(negedge clk);
    end
    check(nrep == exp_v.size(), $sformatf("sort: %0d reports, expected %0d", nrep, exp_v.size()));
    check(cycle - t0 == 2 * (W + H + 1) * exp_v.size() + 1, "sort total length");
  endtask

  initial begin
    done_all = 0;
    rst = 1'b1; we = 1'b0; waddr = '0; wdata = '0; wempty = 1'b0;
    cmd_valid = 1'b0; cmd = CMD_SEARCH; key = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int t = 0; t < int'(TRIALS); t++) begin
      logic [63:0] pool [3];
      foreach (pool[j]) pool[j] = rnd();
      for (int i = 1; i < int'(N); i++)
        load(i, ($urandom_range(2) == 0) ? pool[$urandom_range(2)] : rnd(), ($urandom_range(7) == 0));
      do_search(rnd());
      do_search(val[1 + $urandom_range(N - 2)]);
      do_search(val[1 + $urandom_range(N - 2)] ^ 64'd1);
      do_extreme(1'b0);
      do_extreme(1'b1);
      do_sort(t[0]);
    end
    done_all = 1;
  end

endmodule
