// addr_gen: Address Generation of the Gathering Unit.
//
// Walks the work half of the Ray Index Table M entries (ray samples) at a time. For each
// group it spends NVERT = 8 cycles, one per voxel corner: in cycle v it sends the VFT the
// local address of corner v for every lane (one lane per VFT read port) and, one cycle
// later to line up with the VFT read data, broadcasts the corner's interpolation weight
// to the reducers of that lane. A pass of n samples therefore takes 8*ceil(n/M) issue
// cycles, the rate the paper gives (one vertex feature per cycle per port).
//
// The local address of a vertex is its ID minus the ID of the MVoxel's first vertex
// (mv_base), since an MVoxel's vertices are stored contiguously; an ID outside the MVoxel
// sets the sticky `oob` flag. A new group starts only when `fifo_room` says every feature
// FIFO can take its result; otherwise generation stalls (`stall` high). Lanes past the
// last sample of a short final group are marked invalid in `red_lane`.
//
// Interface: `start` (with n_samples, mv_base) begins a pass while idle; `done` pulses
// when the last corner has been issued. The RIT read ports are registered (1 cycle).
// The grouping, the address rule and the stall rule are this design's choices.
module addr_gen
  import cicero_pkg::*;
#(
  parameter int unsigned M       = NPORT,
  parameter int unsigned ENTRIES = RIT_ENTRIES,
  parameter int unsigned POINTS  = MV_POINTS
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic [$clog2(ENTRIES+1)-1:0]         n_samples,
  input  logic [VID_W-1:0]                     mv_base,
  output logic [M-1:0][$clog2(ENTRIES)-1:0]    rit_rd_idx,
  input  rit_entry_t [M-1:0]                   rit_rd_data,
  output logic                                 vft_re,
  output logic [M-1:0][$clog2(POINTS)-1:0]     vft_addr,
  output logic                                 red_valid,
  output logic                                 red_first,
  output logic                                 red_last,
  output logic [M-1:0][IW_W-1:0]               red_w,
  output logic [M-1:0]                         red_lane,
  output logic [M-1:0][$clog2(ENTRIES)-1:0]    red_idx,
  input  logic                                 fifo_room,
  output logic                                 busy,
  output logic                                 stall,
  output logic                                 done,
  output logic                                 oob
);

  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned CW = $clog2(ENTRIES + 1) + 1;  // group base may pass ENTRIES
  localparam int unsigned AW = $clog2(POINTS);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_ISSUE} state_e;
  state_e state;

  logic [CW-1:0]         n_q, nxt_base, grp_base;
  logic [VID_W-1:0]      base_q;
  logic [2:0]            v;
  rit_entry_t [M-1:0]    cur;
  logic [M-1:0]          lane_q;

  // Entries used this cycle: straight from the RIT at corner 0, latched afterwards.
  rit_entry_t [M-1:0]    ent;
  logic [M-1:0]          lane_now;
  logic                  grp_start, issue, all_issued;
  logic [M-1:0][VID_W-1:0] diff;

  always_comb begin
    all_issued = (nxt_base >= n_q);
    grp_start  = (state == S_ISSUE) && (v == 3'd0) && !all_issued && fifo_room;
    issue      = grp_start || ((state == S_ISSUE) && (v != 3'd0));
    stall      = (state == S_ISSUE) && (v == 3'd0) && !all_issued && !fifo_room;
    ent        = (v == 3'd0) ? rit_rd_data : cur;
    for (int p = 0; p < M; p++) begin
      lane_now[p]   = (v == 3'd0) ? ((nxt_base + CW'(p)) < n_q) : lane_q[p];
      rit_rd_idx[p] = IW'(nxt_base + CW'(p));
      diff[p]       = ent[p].vid[v] - base_q;
      vft_addr[p]   = diff[p][AW-1:0];
    end
    vft_re = issue;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n_q       <= '0;
      nxt_base  <= '0;
      grp_base  <= '0;
      base_q    <= '0;
      v         <= '0;
      cur       <= '0;
      lane_q    <= '0;
      done      <= 1'b0;
      oob       <= 1'b0;
      red_valid <= 1'b0;
      red_first <= 1'b0;
      red_last  <= 1'b0;
      red_w     <= '0;
      red_lane  <= '0;
      red_idx   <= '0;
    end else begin
      done      <= 1'b0;
      red_valid <= issue;
      red_first <= issue && (v == 3'd0);
      red_last  <= issue && (v == 3'(NVERT - 1));
      case (state)
        S_IDLE: if (start) begin
          n_q      <= CW'(n_samples);
          base_q   <= mv_base;
          nxt_base <= '0;
          v        <= '0;
          oob      <= 1'b0;
          state    <= S_WAIT;        // RIT read of the first group is in flight
        end
        S_WAIT: state <= S_ISSUE;
        S_ISSUE: begin
          if (v == 3'd0) begin
            if (all_issued) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else if (fifo_room) begin
              cur      <= rit_rd_data;
              lane_q   <= lane_now;
              grp_base <= nxt_base;
              nxt_base <= nxt_base + CW'(M);   // prefetch the next group
              v        <= 3'd1;
            end
          end else begin
            v <= v + 3'd1;                    // wraps to 0 after corner 7
          end
        end
        default: state <= S_IDLE;
      endcase
      if (issue) begin
        for (int p = 0; p < M; p++) begin
          red_w[p]    <= ent[p].w[v];
          red_lane[p] <= lane_now[p];
          red_idx[p]  <= IW'(((v == 3'd0) ? nxt_base : grp_base) + CW'(p));
          if (lane_now[p] && (diff[p] >= VID_W'(POINTS))) oob <= 1'b1;
        end
      end
    end
  end

  assign busy = (state != S_IDLE);

endmodule
