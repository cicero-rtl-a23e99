// cicero_npu: the Cicero NPU, a systolic-array DNN accelerator extended with a
// Gathering Unit for NeRF feature gathering.
//
// Data flow of one batch of ray samples (reference-frame NeRF rendering):
//   DMA -> RIT (ray sample corner IDs and weights)      rit_* ports
//   DRAM stream -> VFT (one MVoxel of vertex features)  vft_* ports
//   gu_start: the Gathering Unit interpolates every sample of the batch and writes
//             its 32-channel feature into the GU half of the global feature buffer
//   gfb_swap: hands the gathered batch to the MLP side
//   cmd_*:    MLP layers (24x24 systolic array + scalar unit) and max-pool passes on
//             the NPU half, results written back into it
//   rd_*:     read-back of results from the NPU half (DMA), while no command runs.
// Gathering of the next batch (and the fills of the next RIT entries and MVoxel) can
// run while the MLP works on the current one.
//
// The GPU, the control MCU, the DMA, DRAM and the SoC bus are outside this module;
// their transfers and commands are plain ports. The block set and their connections
// follow the paper's SoC figure; the command format, port timing and number formats
// are this design's choices (see the block files).
module cicero_npu
  import cicero_pkg::*;
#(
  parameter int unsigned B = NBANK,
  parameter int unsigned M = NPORT,
  parameter int unsigned N = SA_N
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // RIT fill
  input  logic                         rit_we,
  input  logic [RIT_IW-1:0]            rit_widx,
  input  rit_entry_t                   rit_wdata,
  input  logic                         rit_swap,
  // MVoxel fill
  input  logic                         vft_we,
  input  logic [VFT_AW-1:0]            vft_widx,
  input  fvec_t                        vft_wdata,
  input  logic                         vft_swap,
  // gather command
  input  logic                         gu_start,
  input  logic [RIT_IW:0]              gu_n,
  input  logic [VID_W-1:0]             gu_mv_base,
  input  logic [GFB_AW-1:0]            gu_out_base,
  output logic                         gu_busy,
  output logic                         gu_done,
  output logic                         gu_oob,
  output logic                         gu_stall,
  // weight fill
  input  logic                         wb_we,
  input  logic [WB_AW-1:0]             wb_waddr,
  input  avec_t                        wb_wdata,
  // global feature buffer
  input  logic                         gfb_swap,
  output logic                         gfb_gu_sel,
  // layer commands
  input  logic                         cmd_valid,
  input  layer_cmd_t                   cmd,
  output logic                         cmd_busy,
  output logic                         cmd_done,
  // read-back
  input  logic                         rd_re,
  input  logic [GFB_AW-1:0]            rd_addr,
  output fvec_t                        rd_data
);

  // ---------------- Gathering Unit ----------------
  logic              gu_ovalid;
  logic [GFB_AW-1:0] gu_oaddr;
  fvec_t             gu_odata;

  gathering_unit #(.B(B), .M(M)) u_gu (
    .clk, .rst_n,
    .rit_we, .rit_widx, .rit_wdata, .rit_swap,
    .vft_we, .vft_widx, .vft_wdata, .vft_swap,
    .start(gu_start), .n_samples(gu_n), .mv_base(gu_mv_base), .out_base(gu_out_base),
    .busy(gu_busy), .done(gu_done), .oob(gu_oob), .stall(gu_stall),
    .out_valid(gu_ovalid), .out_ready(1'b1), .out_addr(gu_oaddr), .out_data(gu_odata));

  // ---------------- Global Feature Buffer ----------------
  logic              np_re, np_we, sq_re;
  logic [GFB_AW-1:0] np_raddr, np_waddr, sq_raddr;
  fvec_t             np_rdata, np_wdata;

  global_feature_buffer u_gfb (
    .clk, .rst_n, .swap(gfb_swap), .gu_sel(gfb_gu_sel),
    .gu_we(gu_ovalid), .gu_addr(gu_oaddr), .gu_wdata(gu_odata),
    .np_we, .np_waddr, .np_wdata,
    .np_re, .np_raddr, .np_rdata);

  // read port: the sequencer while it runs, the read-back port otherwise
  assign np_re    = cmd_busy ? sq_re : rd_re;
  assign np_raddr = cmd_busy ? sq_raddr : rd_addr;
  assign rd_data  = np_rdata;

  // ---------------- Weight buffer ----------------
  logic              wb_re;
  logic [WB_AW-1:0]  wb_raddr;
  avec_t             wb_rdata;

  weight_buffer u_wb (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .re(wb_re), .raddr(wb_raddr), .rdata(wb_rdata));

  // ---------------- Systolic array ----------------
  logic                  sa_w_we, sa_in_valid, sa_out_valid;
  logic [$clog2(N)-1:0]  sa_w_row;
  avec_t                 sa_w_data, sa_in_vec;
  pvec_t                 sa_in_psum, sa_out_vec;

  systolic_array #(.N(N), .DW(DATA_W), .AW(ACC_W)) u_sa (
    .clk, .rst_n, .w_we(sa_w_we), .w_row(sa_w_row), .w_data(sa_w_data),
    .in_valid(sa_in_valid), .in_vec(sa_in_vec), .in_psum(sa_in_psum),
    .out_valid(sa_out_valid), .out_vec(sa_out_vec));

  // ---------------- Scalar unit (ReLU / max pooling) ----------------
  su_op_e                       su_op;
  logic [4:0]                   su_shift;
  logic [NBANK-1:0][ACC_W-1:0]  su_a, su_b;
  logic [NBANK-1:0][DATA_W-1:0] su_y;

  scalar_unit u_su (.op(su_op), .shift(su_shift), .a(su_a), .b(su_b), .y(su_y));

  // ---------------- Layer sequencer ----------------
  mlp_sequencer #(.N(N)) u_seq (
    .clk, .rst_n, .cmd_valid, .cmd, .busy(cmd_busy), .done(cmd_done),
    .wb_re, .wb_raddr, .wb_rdata,
    .sa_w_we, .sa_w_row, .sa_w_data, .sa_in_valid, .sa_in_vec, .sa_in_psum,
    .sa_out_valid, .sa_out_vec,
    .su_op, .su_shift, .su_a, .su_b, .su_y,
    .gfb_re(sq_re), .gfb_raddr(sq_raddr), .gfb_rdata(np_rdata),
    .gfb_we(np_we), .gfb_waddr(np_waddr), .gfb_wdata(np_wdata));

endmodule
