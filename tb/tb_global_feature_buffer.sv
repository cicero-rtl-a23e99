// tb_global_feature_buffer: the GU writes one half while the NPU writes and reads the
// other; after a swap the NPU must read what the GU wrote, and the half it wrote
// before must now be the GU's. Also checks the one-cycle read latency and that the
// size is 12288 words per half.
module tb_global_feature_buffer;
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
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic swap = 0, gu_sel, gu_we = 0, np_we = 0, np_re = 0;
  logic [13:0] gu_addr = '0, np_waddr = '0, np_raddr = '0;
  fvec_t gu_wdata = '0, np_wdata = '0, np_rdata;
  global_feature_buffer dut (.*);
  fvec_t m [2][int];
  function automatic fvec_t rnd();
    fvec_t f;
    for (int b = 0; b < 32; b++) f[b] = 16'($urandom);
    return f;
  endfunction
  initial begin
    check($bits(gu_addr) == 14 && GFB_HALF_WORDS == 12288, "12288 words per half");
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int round = 0; round < 4; round++) begin
      int g;
      int addrs [$];
      g = int'(gu_sel);
      addrs.delete();
      for (int t = 0; t < 400; t++) begin
        int ga, na;
        fvec_t gd, nd;
        ga = (t == 0) ? 12287 : $urandom_range(0, 12287);
        na = $urandom_range(0, 12287);
        gd = rnd();
        nd = rnd();
        gu_we <= 1; gu_addr <= 14'(ga); gu_wdata <= gd;
        np_we <= 1; np_waddr <= 14'(na); np_wdata <= nd;
        m[g][ga] = gd; m[1-g][na] = nd; addrs.push_back(ga);
        @(posedge clk);
      end
      gu_we <= 0; np_we <= 0;
      swap <= 1; @(posedge clk); swap <= 0; @(negedge clk);
      check(gu_sel != 1'(g), "swap toggles gu_sel");
      foreach (addrs[k]) begin
        np_re <= 1; np_raddr <= 14'(addrs[k]); @(posedge clk); @(negedge clk);
        check(np_rdata == m[g][addrs[k]], $sformatf("NPU sees GU word %0d", addrs[k]));
      end
      np_re <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
