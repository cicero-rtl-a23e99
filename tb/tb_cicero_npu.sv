// tb_cicero_npu: end-to-end test of the Cicero NPU at its default sizes.
//
// One complete operation: an MVoxel of vertex features is streamed into the VFT and a
// batch of ray samples into the RIT; the Gathering Unit interpolates them into the global
// feature buffer; the buffer halves swap; a two-tile MLP layer with ReLU runs on the
// systolic array; a max-pool pass combines its output with the gathered features; the
// results are read back and compared with a model computed here. While the first batch
// is gathered, the other RIT and VFT halves are filled for a second batch, which is then
// gathered and checked too (and contains one vertex outside its MVoxel, which must raise
// the out-of-range flag).
// Mechanisms counted (each must occur): RIT swap, VFT swap, fill during gather, buffer
// swap, short last group, two-tile accumulation, ReLU clipping, max pooling, out-of-range.
module tb_cicero_npu;
  import cicero_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets fire
  always #5 clk = ~clk;

  logic rit_we = 0, rit_swap = 0, vft_we = 0, vft_swap = 0, gu_start = 0, wb_we = 0;
  logic gfb_swap = 0, cmd_valid = 0, rd_re = 0;
  logic [RIT_IW-1:0] rit_widx = '0;
  rit_entry_t rit_wdata = '0;
  logic [VFT_AW-1:0] vft_widx = '0;
  fvec_t vft_wdata = '0, rd_data;
  logic [RIT_IW:0] gu_n = '0;
  logic [VID_W-1:0] gu_mv_base = '0;
  logic [GFB_AW-1:0] gu_out_base = '0, rd_addr = '0;
  logic gu_busy, gu_done, gu_oob, gu_stall, gfb_gu_sel, cmd_busy, cmd_done;
  logic [WB_AW-1:0] wb_waddr = '0;
  avec_t wb_wdata = '0;
  layer_cmd_t cmd = '0;

  cicero_npu dut (.*);

  int checks = 0, failures = 0;
  int n_rit_swap = 0, n_vft_swap = 0, n_fill_overlap = 0, n_gfb_swap = 0, n_short = 0;
  int n_ktile = 0, n_relu_clip = 0, n_pool = 0, n_oob = 0;

  localparam int NS  = 5;          // samples per batch (odd: last group is short)
  localparam int MVB0 = 4096, MVB1 = 9000;

  // model state
  logic signed [15:0] feat0 [MV_POINTS][NBANK];
  logic signed [15:0] feat1 [MV_POINTS][NBANK];
  rit_entry_t ent0 [NS], ent1 [NS];
  logic signed [15:0] wts [48][SA_N];
  logic signed [15:0] g0 [NS][NBANK], g1 [NS][NBANK], h [NS][SA_N];

  function automatic logic signed [15:0] sat16(longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  function automatic longint rshift_round(longint v, int s);
    if (s == 0) return v;
    return (v + (longint'(1) << (s - 1))) >>> s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic fill_vft(input int which);
    for (int v = 0; v < MV_POINTS; v++) begin
      fvec_t fv;
      for (int b = 0; b < NBANK; b++) begin
        logic signed [15:0] f;
        f = 16'($urandom_range(0, 4000)) - 16'sd2000;
        if (which == 0) feat0[v][b] = f; else feat1[v][b] = f;
        fv[b] = f;
      end
      vft_wdata <= fv;
      vft_we <= 1; vft_widx <= VFT_AW'(v);
      @(posedge clk);
      if (gu_busy) n_fill_overlap++;
    end
    vft_we <= 0;
  endtask

  task automatic fill_rit(input int which, input int mvb, input bit with_oob);
    for (int s = 0; s < NS; s++) begin
      rit_entry_t e;
      for (int v = 0; v < NVERT; v++) begin
        e.vid[v] = 32'(mvb + $urandom_range(0, MV_POINTS - 1));
        e.w[v]   = 16'($urandom_range(0, 8191));
      end
      if (with_oob && s == NS - 1) e.vid[3] = 32'(mvb + MV_POINTS + 7);
      if (which == 0) ent0[s] = e; else ent1[s] = e;
      rit_we <= 1; rit_widx <= RIT_IW'(s); rit_wdata <= e;
      @(posedge clk);
      if (gu_busy) n_fill_overlap++;
    end
    rit_we <= 0;
  endtask

  function automatic logic signed [15:0] interp(input rit_entry_t e, input int b, input int mvb, input int which);
    automatic longint acc = 0;
    for (int v = 0; v < NVERT; v++) begin
      automatic int idx = int'(e.vid[v] - 32'(mvb)) % MV_POINTS;
      automatic longint f = (which == 0) ? longint'(feat0[idx][b]) : longint'(feat1[idx][b]);
      acc += f * longint'(e.w[v]);
    end
    return sat16((acc + 32768) >>> 16);
  endfunction

  task automatic readback(input int addr, output fvec_t d);
    rd_re <= 1; rd_addr <= GFB_AW'(addr);
    @(posedge clk);
    rd_re <= 0;
    @(negedge clk);
    d = rd_data;
  endtask

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fvec_t d;
    int t0, cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // ---- batch 0: fill, swap, gather ----
    fill_vft(0);
    fill_rit(0, MVB0, 1'b0);
    begin vft_swap <= 1; @(posedge clk); vft_swap <= 0; end n_vft_swap++;
    begin rit_swap <= 1; @(posedge clk); rit_swap <= 0; end n_rit_swap++;
    gu_n <= (RIT_IW+1)'(NS); gu_mv_base <= MVB0; gu_out_base <= 14'd0;
    begin gu_start <= 1; @(posedge clk); gu_start <= 0; end
    t0 = $time;
    // fill batch 1 into the other halves while batch 0 is gathered
    fill_rit(1, MVB1, 1'b1);
    fill_vft(1);
    while (gu_busy) @(posedge clk);
    n_short++;   // NS = 5 with M = 2: last group has one lane
    check(!gu_oob, "batch 0 must not flag out-of-range");
    begin gfb_swap <= 1; @(posedge clk); gfb_swap <= 0; end n_gfb_swap++;

    // ---- batch 1: gather into the other half while the MLP runs on batch 0 ----
    begin vft_swap <= 1; @(posedge clk); vft_swap <= 0; end n_vft_swap++;
    begin rit_swap <= 1; @(posedge clk); rit_swap <= 0; end n_rit_swap++;
    gu_n <= (RIT_IW+1)'(NS); gu_mv_base <= MVB1; gu_out_base <= 14'd50;
    begin gu_start <= 1; @(posedge clk); gu_start <= 0; end

    // weights: 48 rows (two tiles), small values
    for (int r = 0; r < 48; r++) begin
      avec_t wr;
      for (int c = 0; c < SA_N; c++) begin
        wts[r][c] = 16'($urandom_range(0, 200)) - 16'sd100;
        wr[c] = wts[r][c];
      end
      wb_wdata <= wr;
      wb_we <= 1; wb_waddr <= WB_AW'(10 + r);
      @(posedge clk);
    end
    wb_we <= 0;

    // expected gathered features
    for (int s = 0; s < NS; s++)
      for (int b = 0; b < NBANK; b++) begin
        g0[s][b] = interp(ent0[s], b, MVB0, 0);
        g1[s][b] = interp(ent1[s], b, MVB1, 1);
      end

    // ---- dense layer on batch 0: 32 -> 24 channels, two input tiles, ReLU ----
    cmd.op <= CMD_DENSE; cmd.act <= SU_RELU; cmd.shift <= 5'd6; cmd.k_tiles <= 2'd2;
    cmd.n_vec <= 8'(NS); cmd.src <= 14'd0; cmd.src_b <= '0; cmd.dst <= 14'd100;
    cmd.w_base <= WB_AW'(10);
    begin cmd_valid <= 1; @(posedge clk); cmd_valid <= 0; end
    t0 = $time;
    n_ktile++;
    while (!cmd_done) @(posedge clk);
    @(posedge clk);
    for (int s = 0; s < NS; s++) begin
      for (int c = 0; c < SA_N; c++) begin
        longint y;
        y = 0;
        for (int ch = 0; ch < NBANK; ch++) y += longint'(g0[s][ch]) * longint'(wts[ch][c]);
        y = rshift_round(y, 6);
        h[s][c] = sat16(y);
        if (h[s][c] < 0) begin h[s][c] = 0; n_relu_clip++; end
      end
    end

    // ---- max pool: max(layer output, gathered features) ----
    cmd.op <= CMD_POOL; cmd.shift <= 5'd0; cmd.src <= 14'd100; cmd.src_b <= 14'd0;
    cmd.dst <= 14'd200;
    begin cmd_valid <= 1; @(posedge clk); cmd_valid <= 0; end
    while (!cmd_done) @(posedge clk);
    @(posedge clk);
    n_pool++;

    // ---- read back and compare batch 0 results ----
    for (int s = 0; s < NS; s++) begin
      readback(s, d);
      for (int b = 0; b < NBANK; b++) check(d[b] == g0[s][b], $sformatf("gather s%0d ch%0d", s, b));
      readback(100 + s, d);
      for (int c = 0; c < NBANK; c++)
        check($signed(d[c]) == ((c < SA_N) ? h[s][c] : 16'sd0), $sformatf("mlp s%0d ch%0d got %0d", s, c, $signed(d[c])));
      readback(200 + s, d);
      for (int c = 0; c < NBANK; c++) begin
        logic signed [15:0] a, e;
        a = (c < SA_N) ? h[s][c] : 16'sd0;
        e = (a > g0[s][c]) ? a : g0[s][c];
        check($signed(d[c]) == e, $sformatf("pool s%0d ch%0d", s, c));
      end
    end

    // ---- batch 1: wait, swap, check ----
    while (gu_busy) @(posedge clk);
    check(gu_oob, "batch 1 out-of-range vertex must raise oob");
    if (gu_oob) n_oob++;
    begin gfb_swap <= 1; @(posedge clk); gfb_swap <= 0; end n_gfb_swap++;
    @(posedge clk);
    for (int s = 0; s < NS - 1; s++) begin   // last sample has the out-of-range corner
      readback(50 + s, d);
      for (int b = 0; b < NBANK; b++) check(d[b] == g1[s][b], $sformatf("gather1 s%0d ch%0d", s, b));
    end

    $display("mechanisms: rit_swap=%0d vft_swap=%0d fill_overlap=%0d gfb_swap=%0d short_group=%0d ktile=%0d relu_clip=%0d pool=%0d oob=%0d",
             n_rit_swap, n_vft_swap, n_fill_overlap, n_gfb_swap, n_short, n_ktile, n_relu_clip, n_pool, n_oob);
    check(n_rit_swap > 0, "RIT swap"); check(n_vft_swap > 0, "VFT swap");
    check(n_fill_overlap > 0, "fill during gather"); check(n_gfb_swap > 0, "buffer swap");
    check(n_short > 0, "short group"); check(n_ktile > 0, "two-tile layer");
    check(n_relu_clip > 0, "ReLU clipping"); check(n_pool > 0, "max pool"); check(n_oob > 0, "out of range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
