// rit_buffer: double-buffered Ray Index Table of the Gathering Unit.
//
// Two halves of ENTRIES entries each. Every entry describes one ray sample: the eight
// vertex IDs of the voxel that holds the sample and the eight trilinear weights
// (rit_entry_t, 48 bytes). The DMA fills the "fill" half through the write port while
// Address Generation reads the "work" half; a one-cycle `swap` pulse exchanges the roles,
// so loading the next batch of entries overlaps gathering of the current one.
//
// Interface and timing: one write per cycle into the fill half; NPORT read ports on the
// work half, each registered (data one cycle after the index). `work_sel` names the
// half being read. The size (128 entries of 48 bytes, two halves) follows the paper;
// the number of read ports and the port timing are this design's choice.
module rit_buffer
  import cicero_pkg::*;
#(
  parameter int unsigned ENTRIES = RIT_ENTRIES,
  parameter int unsigned NRD     = NPORT
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  wr_en,
  input  logic [$clog2(ENTRIES)-1:0]            wr_idx,
  input  rit_entry_t                            wr_data,
  input  logic                                  swap,
  input  logic [NRD-1:0][$clog2(ENTRIES)-1:0]   rd_idx,
  output rit_entry_t [NRD-1:0]                  rd_data,
  output logic                                  work_sel
);

  rit_entry_t mem [2][ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) work_sel <= 1'b0;
    else if (swap) work_sel <= ~work_sel;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[~work_sel][wr_idx] <= wr_data;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    always_ff @(posedge clk) rd_data[p] <= mem[work_sel][rd_idx[p]];
  end

endmodule
