// tb_vft: fills an MVoxel of random features (one vector per beat), swaps, and reads
// random vertex pairs on the two ports in every cycle, checking that every bank returns
// its own channel (channel-major layout) with one-cycle latency, also while the other
// half is being filled.
module tb_vft;
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
  logic wr_en = 0, swap = 0, re = 0, work_sel;
  logic [8:0] wr_idx = '0;
  fvec_t wr_data = '0;
  logic [1:0][8:0] rd_addr = '0;
  fvec_t [1:0] rd_data;
  vft dut (.*);
  fvec_t m [2][512];
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int round = 0; round < 2; round++) begin
      for (int i = 0; i < 512; i++) begin
        fvec_t f;
        for (int b = 0; b < 32; b++) f[b] = 16'($urandom);
        m[1 - int'(work_sel)][i] = f;
        wr_en <= 1; wr_idx <= 9'(i); wr_data <= f; @(posedge clk);
      end
      wr_en <= 0;
      swap <= 1; @(posedge clk); swap <= 0; @(posedge clk);
      for (int t = 0; t < 600; t++) begin
        int a0, a1;
        fvec_t f;
        a0 = $urandom_range(0, 511);
        a1 = $urandom_range(0, 511);
        for (int b = 0; b < 32; b++) f[b] = 16'($urandom);
        m[1 - int'(work_sel)][t % 512] = f;               // fill the other half meanwhile
        wr_en <= 1; wr_idx <= 9'(t % 512); wr_data <= f;
        re <= 1; rd_addr <= {9'(a1), 9'(a0)};
        @(posedge clk); @(negedge clk);
        for (int b = 0; b < 32; b++) begin
          check(rd_data[0][b] == m[int'(work_sel)][a0][b], $sformatf("port0 v%0d bank%0d", a0, b));
          check(rd_data[1][b] == m[int'(work_sel)][a1][b], $sformatf("port1 v%0d bank%0d", a1, b));
        end
      end
      wr_en <= 0; re <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
