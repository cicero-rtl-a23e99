// tb_weight_buffer: writes random rows at random addresses over the full 96 KB range
// and reads them back with one-cycle latency.
module tb_weight_buffer;
  import cicero_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets fire
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic we = 0, re = 0;
  logic [10:0] waddr = '0, raddr = '0;
  avec_t wdata = '0, rdata;
  weight_buffer dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  avec_t m [2048];
  bit wr [2048];
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int t = 0; t < 3000; t++) begin
      automatic int a = (t < 2048) ? t : $urandom_range(0, 2047);
      avec_t d;
      for (int c = 0; c < 24; c++) d[c] = 16'($urandom);
      m[a] = d; we <= 1; waddr <= 11'(a); wdata <= d; @(posedge clk);
    end
    we <= 0;
    for (int t = 0; t < 2000; t++) begin
      automatic int a = $urandom_range(0, 2047);
      re <= 1; raddr <= 11'(a); @(posedge clk); @(negedge clk);
      check(rdata == m[a], $sformatf("row %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
