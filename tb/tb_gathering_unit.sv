// tb_gathering_unit: fills an MVoxel and a Ray Index Table with random vertices and
// weights and gathers batches of samples, checking every output vector against an
// integer model of trilinear interpolation. Also checks:
//   - throughput: a batch of n samples takes 8 cycles per group of M = 2 samples (the
//     eight vertex steps), plus a fixed pipeline tail;
//   - back-pressure: with out_ready held low the feature FIFOs fill, `stall` rises and
//     no sample is lost or duplicated;
//   - a vertex outside the MVoxel sets `oob`;
//   - filling the other RIT/VFT halves during a gather does not disturb it.
module tb_gathering_unit;
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
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic rit_we = 0, rit_swap = 0, vft_we = 0, vft_swap = 0, start = 0, out_ready = 1;
  logic [6:0] rit_widx = '0;
  rit_entry_t rit_wdata = '0;
  logic [8:0] vft_widx = '0;
  fvec_t vft_wdata = '0, out_data;
  logic [7:0] n_samples = '0;
  logic [31:0] mv_base = '0;
  logic [13:0] out_base = '0, out_addr;
  logic busy, done, oob, stall, out_valid;
  gathering_unit dut (.*);

  logic signed [15:0] feat [2][512][32];
  rit_entry_t rit [2][128];
  int vsel = 0, rsel = 0;      // halves being filled next
  int n_stall = 0, n_out = 0;
  bit seen [int];
  fvec_t got [int];
  always @(posedge clk) begin
    if (stall) n_stall++;
    if (out_valid && out_ready) begin
      n_out++;
      checks++;
      if (seen.exists(int'(out_addr))) begin failures++; $display("FAIL: duplicate %0d", out_addr); end
      seen[int'(out_addr)] = 1;
      got[int'(out_addr)] = out_data;
    end
  end

  task automatic fill_vft(input int h);
    for (int i = 0; i < 512; i++) begin
      fvec_t f;
      for (int b = 0; b < 32; b++) begin feat[h][i][b] = 16'($urandom); f[b] = feat[h][i][b]; end
      vft_we <= 1; vft_widx <= 9'(i); vft_wdata <= f; @(posedge clk);
    end
    vft_we <= 0;
  endtask
  task automatic fill_rit(input int h, input int mvb, input int bad);
    for (int s = 0; s < 128; s++) begin
      rit_entry_t e;
      for (int v = 0; v < 8; v++) begin
        e.vid[v] = 32'(mvb + $urandom_range(0, 511));
        e.w[v]   = (s % 9 == 0) ? 16'hffff : 16'($urandom_range(0, 16383));
      end
      if (s == bad) e.vid[5] = 32'(mvb + 600);
      rit[h][s] = e;
      rit_we <= 1; rit_widx <= 7'(s); rit_wdata <= e; @(posedge clk);
    end
    rit_we <= 0;
  endtask
  function automatic logic signed [15:0] model(input int vh, input int rh, input int s,
                                                input int mvb, input int b);
    automatic longint acc = 0, y;
    for (int v = 0; v < 8; v++) begin
      automatic int idx = int'(rit[rh][s].vid[v] - 32'(mvb)) % 512;
      acc += longint'(feat[vh][idx][b]) * longint'(rit[rh][s].w[v]);
    end
    y = (acc + 32768) >>> 16;
    if (y > 32767) y = 32767;
    if (y < -32768) y = -32768;
    return 16'(y);
  endfunction

  task automatic gather(input int n, input int mvb, input int ob, input bit throttle,
                        input int exp_bad, output int cycles);
    automatic int vh = 1 - vsel, rh = 1 - rsel;   // halves now in use
    int t0;
    seen.delete(); got.delete(); n_out = 0;
    start <= 1; n_samples <= 8'(n); mv_base <= 32'(mvb); out_base <= 14'(ob);
    @(posedge clk); start <= 0;
    t0 = 0;
    if (throttle) begin
      out_ready <= 0;
      repeat (60) @(posedge clk);
      out_ready <= 1;
      t0 = 60;
    end
    while (!done) begin @(posedge clk); t0++; end
    cycles = t0;
    check(n_out == n, $sformatf("%0d of %0d samples came out", n_out, n));
    for (int s = 0; s < n; s++)
      if (got.exists(ob + s))
        for (int b = 0; b < 32; b++)
          if (!(s == exp_bad))
            check(got[ob + s][b] == model(vh, rh, s, mvb, b),
                  $sformatf("sample %0d ch %0d", s, b));
    check(oob == (exp_bad >= 0 && exp_bad < n), "oob flag");
  endtask

  initial begin
    int cyc;
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    fill_vft(0); fill_rit(0, 1000, -1);
    vft_swap <= 1; rit_swap <= 1; @(posedge clk); vft_swap <= 0; rit_swap <= 0;
    vsel = 1; rsel = 1;
    @(posedge clk);
    // full batch, unthrottled: rate check
    gather(128, 1000, 0, 0, -1, cyc);
    $display("gather 128 samples: %0d cycles", cyc);
    check(cyc >= 8 * 64 && cyc <= 8 * 64 + 12, $sformatf("8 cycles per group of 2 (%0d)", cyc));
    // odd batch: short last group
    gather(7, 1000, 300, 0, -1, cyc);
    check(cyc >= 8 * 4 && cyc <= 8 * 4 + 12, $sformatf("odd batch rate (%0d)", cyc));
    // back-pressure
    n_stall = 0;
    gather(40, 1000, 500, 1, -1, cyc);
    check(n_stall > 0, "stall seen while out_ready low");
    // fill the other halves during a gather, then swap and use them
    fork
      gather(128, 1000, 1000, 0, -1, cyc);
      begin fill_vft(1); fill_rit(1, 5000, 17); end
    join
    vft_swap <= 1; rit_swap <= 1; @(posedge clk); vft_swap <= 0; rit_swap <= 0;
    vsel = 0; rsel = 0;
    @(posedge clk);
    gather(64, 5000, 2000, 0, 17, cyc);
    $display("stall cycles %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
