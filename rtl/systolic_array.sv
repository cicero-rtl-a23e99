// systolic_array: the N x N weight-stationary MAC array of the NPU (N = 24).
//
// Cell (r, c) holds weight W[r][c]. An input vector x (N activations) and a vector of
// incoming partial sums p enter together; the array returns
//     y[c] = p[c] + sum_r W[r][c] * x[r]
// i.e. the product of one 24x24 weight tile with x, where p carries the sum over earlier
// input tiles. Activation x[r] is delayed r cycles before entering row r and then moves
// right one cell per cycle; partial sums move down one cell per cycle; the results of
// column c are delayed N-1-c cycles so that a whole vector leaves at once.
// One vector can enter every cycle.
//
// Interface and timing: weight rows are written with w_we / w_row / w_data (one row
// per cycle, only while no vector is in flight). A vector entering with in_valid in
// cycle t leaves with out_valid in cycle t + 2N - 1. The 24x24 size follows the paper;
// the dataflow, widths and latency are this design's choices.
module systolic_array #(
  parameter int unsigned N  = 24,
  parameter int unsigned DW = 16,
  parameter int unsigned AW = 40
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         w_we,
  input  logic [$clog2(N)-1:0]         w_row,
  input  logic [N-1:0][DW-1:0]         w_data,
  input  logic                         in_valid,
  input  logic [N-1:0][DW-1:0]         in_vec,
  input  logic [N-1:0][AW-1:0]         in_psum,
  output logic                         out_valid,
  output logic [N-1:0][AW-1:0]         out_vec
);

  localparam int unsigned LAT = 2 * N - 1;

  logic [N-1:0][N:0][DW-1:0]   a;    // a[r][c]: activation entering cell (r, c)
  logic [N-1:0][N:0]           av;   // its valid bit
  logic [N:0][N-1:0][AW-1:0]   p;    // p[r][c]: partial sum entering cell (r, c)

  // Input skew: row r waits r cycles.
  for (genvar r = 0; r < N; r++) begin : g_skew
    logic [DW-1:0] sk  [r+1];
    logic          skv [r+1];
    assign sk[0]  = in_vec[r];
    assign skv[0] = in_valid;
    for (genvar i = 1; i <= r; i++) begin : g_d
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          sk[i]  <= '0;
          skv[i] <= 1'b0;
        end else begin
          sk[i]  <= sk[i-1];
          skv[i] <= skv[i-1];
        end
      end
    end
    assign a[r][0]  = sk[r];
    assign av[r][0] = skv[r];
  end

  // Partial-sum skew: column c waits c cycles.
  for (genvar c = 0; c < N; c++) begin : g_pskew
    logic [AW-1:0] ps [c+1];
    assign ps[0] = in_psum[c];
    for (genvar i = 1; i <= c; i++) begin : g_d
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) ps[i] <= '0;
        else        ps[i] <= ps[i-1];
      end
    end
    assign p[0][c] = ps[c];
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      mac_pe #(.DW(DW), .AW(AW)) u_pe (
        .clk, .rst_n,
        .w_load(w_we && (w_row == ($clog2(N))'(r))), .w_in(w_data[c]),
        .v_in(av[r][c]), .a_in(a[r][c]), .p_in(p[r][c]),
        .v_out(av[r][c+1]), .a_out(a[r][c+1]), .p_out(p[r+1][c]));
    end
  end

  // Output deskew: column c waits N-1-c cycles.
  for (genvar c = 0; c < N; c++) begin : g_dsk
    localparam int unsigned D = N - 1 - c;
    logic [AW-1:0] ds [D+1];
    assign ds[0] = p[N][c];
    for (genvar i = 1; i <= D; i++) begin : g_d
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) ds[i] <= '0;
        else        ds[i] <= ds[i-1];
      end
    end
    assign out_vec[c] = ds[D];
  end

  // Valid pipeline over the whole latency.
  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[LAT-1];

  a_no_reload_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    w_we |-> !(|vpipe) && !in_valid);

endmodule
