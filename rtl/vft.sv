// vft: Vertex Feature Table, the conflict-free channel-major feature store.
//
// B independent single-channel SRAM banks. Bank b holds channel b of every vertex of
// the MVoxel currently loaded, at the vertex's index inside the MVoxel (channel-major
// layout). Gathering a feature vector therefore touches every bank once at the same
// address, and read port p of bank b always serves lane (p, b): there is no crossbar and
// no bank conflict, whatever the vertex IDs. Each bank has M read ports, so M ray
// samples are gathered in parallel, one vertex per cycle each.
//
// The table is double-buffered: one half receives the next MVoxel from DRAM while the
// other is gathered from; `swap` exchanges them.
//
// Interface and timing: a fill beat (wr_en) writes one whole vertex feature vector,
// channel b into bank b. A read (re) returns, one cycle later, the full B-channel vector
// at rd_addr[p] for every port p. Banks, ports, depth and the double buffer follow the
// paper; 16-bit channels and the 1-cycle read latency are this design's choices.
module vft
  import cicero_pkg::*;
#(
  parameter int unsigned B     = NBANK,
  parameter int unsigned M     = NPORT,
  parameter int unsigned DEPTH = MV_POINTS,
  parameter int unsigned FW    = FEAT_W
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 wr_en,
  input  logic [$clog2(DEPTH)-1:0]             wr_idx,
  input  logic [B-1:0][FW-1:0]                 wr_data,
  input  logic                                 swap,
  input  logic                                 re,
  input  logic [M-1:0][$clog2(DEPTH)-1:0]      rd_addr,
  output logic [M-1:0][B-1:0][FW-1:0]          rd_data,
  output logic                                 work_sel
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) work_sel <= 1'b0;
    else if (swap) work_sel <= ~work_sel;
  end

  for (genvar b = 0; b < B; b++) begin : g_bank
    // One bank: both halves of channel b.
    logic [FW-1:0] bank [2][DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en) bank[~work_sel][wr_idx] <= wr_data[b];
    end

    for (genvar p = 0; p < M; p++) begin : g_port
      always_ff @(posedge clk) begin
        if (re) rd_data[p][b] <= bank[work_sel][rd_addr[p]];
      end
    end
  end

endmodule
