// tb_rit_buffer: fills one half, swaps, reads back on both ports while filling the
// other half, and checks that reads see only the work half.
module tb_rit_buffer;
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
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic wr_en = 0, swap = 0, work_sel;
  logic [6:0] wr_idx = '0;
  rit_entry_t wr_data = '0;
  logic [1:0][6:0] rd_idx = '0;
  rit_entry_t [1:0] rd_data;
  rit_buffer dut (.*);
  rit_entry_t m [2][128];
  task automatic fill(input int h);
    for (int i = 0; i < 128; i++) begin
      rit_entry_t e;
      for (int v = 0; v < 8; v++) begin e.vid[v] = $urandom; e.w[v] = 16'($urandom); end
      m[h][i] = e;
      wr_en <= 1; wr_idx <= 7'(i); wr_data <= e; @(posedge clk);
    end
    wr_en <= 0;
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int round = 0; round < 3; round++) begin
      fill(~work_sel);
      swap <= 1; @(posedge clk); swap <= 0; @(posedge clk);
      for (int i = 0; i < 128; i++) begin
        automatic int j = $urandom_range(0, 127);
        rd_idx <= {7'(j), 7'(i)};
        @(posedge clk); @(negedge clk);
        check(rd_data[0] == m[int'(work_sel)][i], $sformatf("port0 entry %0d", i));
        check(rd_data[1] == m[int'(work_sel)][j], $sformatf("port1 entry %0d", j));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
