// tb_feature_fifo: random push/pop traffic against a queue model; checks order, data,
// count, empty and full.
module tb_feature_fifo;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets fire
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic push = 0, pop = 0, empty, full;
  logic [518:0] din = '0, dout;
  logic [2:0] count;
  feature_fifo dut (.*);
  logic [518:0] q [$];
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int t = 0; t < 2000; t++) begin
      bit pu, po;
      logic [518:0] d;
      @(negedge clk);
      check(int'(count) == q.size(), "count");
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == 4), "full");
      if (q.size() > 0) check(dout == q[0], "head data");
      pu = ($urandom_range(0, 1) == 1) && (q.size() < 4);
      po = ($urandom_range(0, 2) != 0) && (q.size() > 0);
      d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
           $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      push <= pu; pop <= po; din <= d;
      @(posedge clk);
      if (po) void'(q.pop_front());
      if (pu) q.push_back(d);
      push <= 0; pop <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
