// tb_imc_root: unit test of the root node. The testbench drives the three
// children's state bits and checks:
//  * search: after init the root shows the initiate bit, then the key MSB
//    first; for the next two steps it shows 0 whatever the children send; from
//    then on it ORs the children in and, once 1, stays 1. OP_IDENT sends the
//    key and then stays 0.
//  * max / min: nothing starts until a child sends the initiate bit; then,
//    with each child sending a word MSB first, the word of the root must end
//    as the max (min) of the three, each step's state being the OR (AND) of
//    the children not yet disabled. The word then holds.
module tb_imc_root;
  import cayley_pkg::*;

  localparam int unsigned W   = 4;
  localparam int unsigned ETA = 2;

  logic         clk = 1'b0;
  logic         rst;
  logic         we;
  logic [W-1:0] wdata;
  imc_op_e      op;
  logic         init, run;
  logic [ETA:0] child_state;
  logic         state;
  logic [W-1:0] word;

  imc_root #(.W(W), .ETA(ETA)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic step(input logic [ETA:0] c);
    run = 1; child_state = c;
    @(negedge clk);
    run = 0;
  endtask

  task automatic t_search(input logic [W-1:0] k, input bit ident, input int unsigned hit_at);
    @(negedge clk); we = 1; wdata = k;
    @(negedge clk); we = 0; op = ident ? OP_IDENT : OP_SEARCH; init = 1;
    @(negedge clk); init = 0;
    check(state == 1, "initiate shown after init");
    for (int b = W - 1; b >= 0; b--) begin
      step(3'b111);
      check(state == k[b], $sformatf("key bit %0d", b));
    end
    step(3'b111);
    check(state == 0, "children ignored (step W)");
    step(3'b111);
    check(state == 0, "children ignored (step W+1)");
    for (int i = 0; i < 8; i++) begin
      step((i == int'(hit_at)) ? 3'b010 : 3'b000);
      check(state == (!ident && i >= int'(hit_at)),
            $sformatf("search answer step %0d: %0d", i, state));
    end
    check(word == k, "key kept in the word");
  endtask

  task automatic t_extreme(input bit is_min, input logic [W-1:0] a, input logic [W-1:0] b,
                           input logic [W-1:0] c);
    bit en [3];
    bit bits [3];
    bit r;
    logic [W-1:0] m;
    @(negedge clk); op = is_min ? OP_MIN : OP_MAX; init = 1;
    @(negedge clk); init = 0;
    check(word == 0 && state == 0, "root word cleared by init");
    step(3'b000);
    step(3'b000);
    check(word == 0 && state == 0, "no start without initiate");
    step(3'b111);
    en = '{1, 1, 1};
    for (int k = W - 1; k >= 0; k--) begin
      bits[0] = a[k]; bits[1] = b[k]; bits[2] = c[k];
      r = is_min;
      for (int j = 0; j < 3; j++) if (en[j]) r = is_min ? (r & bits[j]) : (r | bits[j]);
      step({c[k], b[k], a[k]});
      check(state == r, "state is the reduction of enabled children");
      for (int j = 0; j < 3; j++) if (en[j] && bits[j] != r) en[j] = 0;
    end
    if (is_min) begin m = a; if (b < m) m = b; if (c < m) m = c; end
    else        begin m = a; if (b > m) m = b; if (c > m) m = c; end
    check(word == m, $sformatf("%s: word %0d expected %0d", is_min ? "min" : "max", word, m));
    step(3'b101);
    step(3'b010);
    check(word == m, "word holds after W bits");
  endtask

  initial begin
    rst = 1; we = 0; wdata = '0; op = OP_IDLE; init = 0; run = 0; child_state = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    check(word == 0 && state == 0, "reset");
    // the paper's example key 9 (1001)
    t_search(4'd9, 0, 2);
    t_search(4'd9, 1, 2);
    t_search(4'd13, 0, 100);
    for (int t = 0; t < 40; t++) t_search(W'($urandom), t[0], $urandom_range(9));
    // the three level-1 maxima of the paper's max example: 14, 11 and 10 -> 14
    t_extreme(0, 4'd14, 4'd11, 4'd10);
    t_extreme(1, 4'd5, 4'd7, 4'd10);
    for (int t = 0; t < 80; t++) t_extreme(t[0], W'($urandom), W'($urandom), W'($urandom));
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
