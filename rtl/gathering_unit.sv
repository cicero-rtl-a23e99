// gathering_unit: the Gathering Unit (GU) that performs NeRF feature gathering.
//
// Data path, as in the paper: Ray Index Table -> Address Generation -> Vertex Feature
// Table (B channel-major banks, M read ports each) -> B x M reducers -> M feature FIFOs
// -> global feature buffer. Lane p (one VFT read port) handles one ray sample at a
// time; its B reducers interpolate the B channels of that sample in parallel, each fed
// by its own bank, so the banks are never contended. A group of M samples takes
// 8 cycles, one per voxel corner.
//
// Both the RIT and the VFT are double-buffered: the DMA fills the next batch of RIT
// entries (rit_*) and the next MVoxel (vft_*, one vertex feature vector per beat) while
// the current ones are gathered; rit_swap / vft_swap exchange the halves between passes.
// `start` runs a pass over n_samples RIT entries against the MVoxel whose first vertex
// ID is mv_base. The interpolated vector of RIT entry i is written to out_base + i.
//
// Interface and timing: the output is a valid/ready write stream, one vector per cycle,
// drained round-robin from the FIFOs. `busy` covers the whole pass until the last vector
// has left; `done` pulses when it falls. `stall` is high in cycles where Address
// Generation waits for FIFO room. The FIFO depth, the drain order and the output
// addressing are this design's choices.
module gathering_unit
  import cicero_pkg::*;
#(
  parameter int unsigned B          = NBANK,
  parameter int unsigned M          = NPORT,
  parameter int unsigned ENTRIES    = RIT_ENTRIES,
  parameter int unsigned POINTS     = MV_POINTS,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned OAW        = GFB_AW
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // RIT fill (DMA)
  input  logic                             rit_we,
  input  logic [$clog2(ENTRIES)-1:0]       rit_widx,
  input  rit_entry_t                       rit_wdata,
  input  logic                             rit_swap,
  // MVoxel fill (DRAM stream)
  input  logic                             vft_we,
  input  logic [$clog2(POINTS)-1:0]        vft_widx,
  input  logic [B-1:0][FEAT_W-1:0]         vft_wdata,
  input  logic                             vft_swap,
  // gather command
  input  logic                             start,
  input  logic [$clog2(ENTRIES+1)-1:0]     n_samples,
  input  logic [VID_W-1:0]                 mv_base,
  input  logic [OAW-1:0]                   out_base,
  output logic                             busy,
  output logic                             done,
  output logic                             oob,
  output logic                             stall,
  // interpolated features to the global feature buffer
  output logic                             out_valid,
  input  logic                             out_ready,
  output logic [OAW-1:0]                   out_addr,
  output logic [B-1:0][FEAT_W-1:0]         out_data
);

  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned AW = $clog2(POINTS);
  localparam int unsigned FEW = B * FEAT_W + IW;           // FIFO entry: {idx, vector}
  localparam int unsigned FCW = $clog2(FIFO_DEPTH + 1);

  // ---------------- Ray Index Table ----------------
  logic [M-1:0][IW-1:0] rit_ridx;
  rit_entry_t [M-1:0]   rit_rdata;
  logic                 rit_sel;

  rit_buffer #(.ENTRIES(ENTRIES), .NRD(M)) u_rit (
    .clk, .rst_n, .wr_en(rit_we), .wr_idx(rit_widx), .wr_data(rit_wdata),
    .swap(rit_swap), .rd_idx(rit_ridx), .rd_data(rit_rdata), .work_sel(rit_sel));

  // ---------------- Address Generation ----------------
  logic                  vft_re, red_valid, red_first, red_last, fifo_room, ag_busy, ag_done;
  logic [M-1:0][AW-1:0]  vft_raddr;
  logic [M-1:0][IW_W-1:0] red_w;
  logic [M-1:0]          red_lane;
  logic [M-1:0][IW-1:0]  red_idx;

  addr_gen #(.M(M), .ENTRIES(ENTRIES), .POINTS(POINTS)) u_ag (
    .clk, .rst_n, .start(start && !busy), .n_samples, .mv_base,
    .rit_rd_idx(rit_ridx), .rit_rd_data(rit_rdata),
    .vft_re, .vft_addr(vft_raddr),
    .red_valid, .red_first, .red_last, .red_w, .red_lane, .red_idx,
    .fifo_room, .busy(ag_busy), .stall, .done(ag_done), .oob);

  // ---------------- Vertex Feature Table ----------------
  logic [M-1:0][B-1:0][FEAT_W-1:0] vft_rdata;
  logic                            vft_sel;

  vft #(.B(B), .M(M), .DEPTH(POINTS), .FW(FEAT_W)) u_vft (
    .clk, .rst_n, .wr_en(vft_we), .wr_idx(vft_widx), .wr_data(vft_wdata),
    .swap(vft_swap), .re(vft_re), .rd_addr(vft_raddr), .rd_data(vft_rdata),
    .work_sel(vft_sel));

  // ---------------- Reducers: B per lane ----------------
  logic [M-1:0][B-1:0][FEAT_W-1:0] red_out;
  logic [M-1:0][B-1:0]             red_ov;
  logic [M-1:0]                    res_lane;
  logic [M-1:0][IW-1:0]            res_idx;

  for (genvar p = 0; p < M; p++) begin : g_lane
    for (genvar b = 0; b < B; b++) begin : g_ch
      reducer #(.FW(FEAT_W), .WW(IW_W), .NV(NVERT)) u_red (
        .clk, .rst_n, .in_valid(red_valid), .first(red_first), .last(red_last),
        .feat(vft_rdata[p][b]), .w(red_w[p]),   // weight broadcast to the lane's B reducers
        .out_valid(red_ov[p][b]), .out(red_out[p][b]));
    end
  end

  // Sample index and lane mask ride along with the result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_lane <= '0;
      res_idx  <= '0;
    end else if (red_valid && red_last) begin
      res_lane <= red_lane;
      res_idx  <= red_idx;
    end
  end

  // ---------------- Feature FIFOs and drain ----------------
  logic [M-1:0]            f_push, f_pop, f_empty, f_full;
  logic [M-1:0][FEW-1:0]   f_dout;
  logic [M-1:0][FCW-1:0]   f_count;
  logic [$clog2(M)-1:0]    rr, pick;
  logic                    any;
  logic [OAW-1:0]          out_base_q;
  logic                    busy_q;

  for (genvar p = 0; p < M; p++) begin : g_fifo
    assign f_push[p] = red_ov[p][0] && res_lane[p];
    feature_fifo #(.W(FEW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(f_push[p]), .din({res_idx[p], red_out[p]}),
      .pop(f_pop[p]), .dout(f_dout[p]), .empty(f_empty[p]), .full(f_full[p]),
      .count(f_count[p]));
  end

  always_comb begin
    fifo_room = 1'b1;
    for (int p = 0; p < M; p++)
      if (f_count[p] > FCW'(FIFO_DEPTH - 2)) fifo_room = 1'b0;
    any  = 1'b0;
    pick = rr;
    for (int k = 0; k < M; k++) begin
      if (!any && !f_empty[(int'(rr) + k) % M]) begin
        any  = 1'b1;
        pick = $clog2(M)'((int'(rr) + k) % M);
      end
    end
    f_pop = '0;
    if (any && out_ready) f_pop[pick] = 1'b1;
  end

  assign out_valid = any;
  assign out_data  = f_dout[pick][B*FEAT_W-1:0];
  assign out_addr  = out_base_q + OAW'(f_dout[pick][FEW-1 -: IW]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr         <= '0;
      out_base_q <= '0;
      busy_q     <= 1'b0;
    end else begin
      if (any && out_ready) rr <= $clog2(M)'((int'(pick) + 1) % M);
      if (start && !busy) out_base_q <= out_base;
      busy_q <= busy;
    end
  end

  // The pass is over when generation has finished and nothing is left in flight.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= 1'b0;
    else if (start && !busy) busy <= 1'b1;
    else if (busy && !ag_busy && !red_valid && !(|red_ov) && (&f_empty)) busy <= 1'b0;
  end
  assign done = busy_q && !busy;

  a_write_has_room: assert property (@(posedge clk) disable iff (!rst_n)
    |f_push |-> !(|(f_push & f_full)));

endmodule
