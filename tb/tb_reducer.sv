// tb_reducer: checks the reducer's trilinear interpolation against an integer model
// over random features and weights, including saturation, and its one-cycle latency.
module tb_reducer;
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
  logic in_valid = 0, first = 0, last = 0, out_valid;
  logic signed [15:0] feat = '0, out;
  logic [15:0] w = '0;
  reducer dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int t = 0; t < 300; t++) begin
      automatic longint acc = 0, e;
      automatic int big = (t % 10 == 0);
      for (int v = 0; v < 8; v++) begin
        logic signed [15:0] f; logic [15:0] ww;
        f  = big ? ((t % 20 == 0) ? 16'sh7fff : -16'sh8000) : 16'($urandom);
        ww = big ? 16'hffff : 16'($urandom_range(0, 16383));
        acc += longint'(f) * longint'(ww);
        in_valid <= 1; first <= (v == 0); last <= (v == 7); feat <= f; w <= ww;
        @(posedge clk);
      end
      in_valid <= 0; first <= 0; last <= 0;
      e = (acc + 32768) >>> 16;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      @(negedge clk);
      check(out_valid, "out_valid one cycle after last");
      check(longint'(out) == e, $sformatf("t=%0d got %0d exp %0d", t, out, e));
      @(negedge clk);
      check(!out_valid, "out_valid is a single pulse");
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
