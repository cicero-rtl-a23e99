// weight_buffer: the NPU's dedicated 96 KB buffer for MLP weights.
//
// A simple dual-port SRAM: one write port filled by DMA and one read port feeding the
// systolic array. A row is SA_N = 24 weights of 16 bits (48 bytes), i.e. one row of a
// 24x24 weight tile, so 96 KB holds 2048 rows (85 tiles). The read is registered: data
// appears the cycle after re. The 96 KB size follows the paper; the row format is this
// design's choice.
module weight_buffer
  import cicero_pkg::*;
#(
  parameter int unsigned BYTES = WB_BYTES,
  parameter int unsigned N     = SA_N,
  parameter int unsigned DW    = DATA_W
) (
  input  logic                                   clk,
  input  logic                                   we,
  input  logic [$clog2(BYTES/(N*DW/8))-1:0]      waddr,
  input  logic [N-1:0][DW-1:0]                   wdata,
  input  logic                                   re,
  input  logic [$clog2(BYTES/(N*DW/8))-1:0]      raddr,
  output logic [N-1:0][DW-1:0]                   rdata
);

  localparam int unsigned ROWS = BYTES / (N * DW / 8);

  logic [N-1:0][DW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
