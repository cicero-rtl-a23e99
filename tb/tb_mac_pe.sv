// tb_mac_pe: random operands; checks the registered activation pass-through and
// p_out = p_in + w * a on valid input, zero otherwise.
module tb_mac_pe;
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
  logic w_load = 0, v_in = 0, v_out;
  logic signed [15:0] w_in = '0, a_in = '0, a_out;
  logic signed [39:0] p_in = '0, p_out;
  mac_pe dut (.*);
  initial begin
    logic signed [15:0] w;
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int t = 0; t < 1000; t++) begin
      logic signed [15:0] a; logic signed [39:0] p; bit v;
      if (t % 50 == 0) begin
        w = 16'($urandom); w_load <= 1; w_in <= w; @(posedge clk); w_load <= 0;
      end
      a = 16'($urandom); p = 40'(signed'($urandom)); v = ($urandom_range(0, 3) != 0);
      v_in <= v; a_in <= a; p_in <= p;
      @(posedge clk); @(negedge clk);
      check(a_out == a, "activation passes right");
      check(v_out == v, "valid passes right");
      check(p_out == (v ? p + 40'(longint'(a) * longint'(w)) : 40'sd0), $sformatf("psum t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
