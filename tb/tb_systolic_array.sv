// tb_systolic_array: small array (N = 4) and full size (N = 24). Loads a random weight
// tile, streams back-to-back random vectors with random incoming partial sums, and
// checks each result against y[c] = p[c] + sum_r W[r][c] x[r] and the 2N-1 cycle latency.

module tb_systolic_array;
  logic clk = 1'b0, rst_n = 1'b1, go = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets fire
  always #5 clk = ~clk;
  logic f4, f24;
  int c4, e4, c24, e24;
  tb_sa_run #(.N(4))  u4  (.clk, .rst_n, .go, .fin(f4),  .checks(c4),  .failures(e4));
  tb_sa_run #(.N(24)) u24 (.clk, .rst_n, .go, .fin(f24), .checks(c24), .failures(e24));
  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c24, e4 + e24 + 1);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk); go <= 1;
    wait (f4 && f24);
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c24, e4 + e24);
    $finish;
  end
endmodule
