// tb_sa_run: test driver for one systolic array of size N, used by tb_systolic_array.
// Loads a random weight tile, streams back-to-back random vectors (with gaps) and random
// incoming partial sums, and checks each result against the integer model and the
// 2N-1 cycle latency. Three weight tiles per run.
module tb_sa_run #(parameter int unsigned N = 4) (
  input  logic clk, input logic rst_n, input logic go, output logic fin,
  output int checks, output int failures
);
  logic w_we = 0, in_valid = 0, out_valid;
  logic [$clog2(N)-1:0] w_row = '0;
  logic [N-1:0][15:0] w_data = '0, in_vec = '0;
  logic [N-1:0][39:0] in_psum = '0, out_vec;
  systolic_array #(.N(N)) dut (.*);
  logic signed [15:0] W [N][N];
  logic [N-1:0][39:0] exp_q [$];
  int t_in [$];
  int cyc = 0;
  // both ends are sampled on the falling edge, so the difference is the latency
  always @(negedge clk) begin
    cyc = cyc + 1;
    if (in_valid) t_in.push_back(cyc);
  end
  always @(negedge clk) #1 if (out_valid) begin
    checks++;
    if (exp_q.size() == 0 || out_vec != exp_q[0]) begin
      failures++; $display("FAIL: N=%0d result mismatch", N);
    end
    checks++;
    if (t_in.size() == 0 || cyc - t_in[0] != 2 * N - 1) begin
      failures++; $display("FAIL: N=%0d latency %0d", N, t_in.size() ? cyc - t_in[0] : -1);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
    if (t_in.size()) void'(t_in.pop_front());
  end
  initial begin
    checks = 0; failures = 0; fin = 0;
    wait (go);
    for (int rep = 0; rep < 3; rep++) begin
      for (int r = 0; r < N; r++) begin
        logic [N-1:0][15:0] row;
        for (int c = 0; c < N; c++) begin W[r][c] = 16'($urandom); row[c] = W[r][c]; end
        w_we <= 1; w_row <= $clog2(N)'(r); w_data <= row; @(posedge clk);
      end
      w_we <= 0;
      for (int k = 0; k < 40; k++) begin
        logic [N-1:0][15:0] x; logic [N-1:0][39:0] p, e;
        automatic bit v = (k % 7 != 3);
        for (int r = 0; r < N; r++) x[r] = 16'($urandom);
        for (int c = 0; c < N; c++) begin
          automatic longint s = longint'(signed'($urandom)) >>> 4;
          p[c] = 40'(s);
          for (int r = 0; r < N; r++) s += longint'($signed(x[r])) * longint'(W[r][c]);
          e[c] = 40'(s);
        end
        in_valid <= v; in_vec <= x; in_psum <= p;
        @(posedge clk);
        if (v) exp_q.push_back(e);
      end
      in_valid <= 0;
      repeat (2 * N + 2) @(posedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: N=%0d results missing", N); end
    end
    fin = 1;
  end
endmodule
