// tb_cayley_imc_sizes: end-to-end test of cayley_imc_top at the sizes the
// paper evaluates besides the default one. Word widths 8, 16, 32, 40 and 64
// bits on the 10-node tree (the word-size sweep of the FPGA evaluation;
// 24, 48 and 56 bits differ only in W), the 22-node tree of order 2 with
// 4 levels, and an order-3 tree. Each instance runs random lists through
// search, max, min and sort and checks answers and latencies (see
// top_check).
module tb_cayley_imc_sizes;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic d8, d16, d32, d40, d64, dh4, de3;

  top_check #(.W(8),  .ETA(2), .H(3), .TRIALS(8)) u_w8  (.clk, .done_all(d8));
  top_check #(.W(16), .ETA(2), .H(3), .TRIALS(6)) u_w16 (.clk, .done_all(d16));
  top_check #(.W(32), .ETA(2), .H(3), .TRIALS(4)) u_w32 (.clk, .done_all(d32));
  top_check #(.W(40), .ETA(2), .H(3), .TRIALS(4)) u_w40 (.clk, .done_all(d40));
  top_check #(.W(64), .ETA(2), .H(3), .TRIALS(4)) u_w64 (.clk, .done_all(d64));
  top_check #(.W(4),  .ETA(2), .H(4), .TRIALS(10)) u_h4 (.clk, .done_all(dh4));
  top_check #(.W(6),  .ETA(3), .H(3), .TRIALS(8)) u_e3  (.clk, .done_all(de3));

  initial begin
    wait (d8 && d16 && d32 && d40 && d64 && dh4 && de3);
    checks   = u_w8.checks + u_w16.checks + u_w32.checks + u_w40.checks + u_w64.checks
             + u_h4.checks + u_e3.checks;
    failures = u_w8.failures + u_w16.failures + u_w32.failures + u_w40.failures
             + u_w64.failures + u_h4.failures + u_e3.failures;
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
