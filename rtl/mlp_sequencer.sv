// mlp_sequencer: runs one MLP layer, or one max-pool pass, of Feature Computation.
//
// The paper runs the NeRF MLP on the NPU's systolic array but does not describe the
// NPU's control; this sequencer is this design's own, kept as small as the datapath
// allows. It works on a batch of n_vec feature vectors in the NPU half of the global
// feature buffer.
//
// CMD_DENSE: for each input tile k (k_tiles of 24 input channels; buffer element
// 24k + r feeds array row r, zero past channel 31):
//   1. load the 24 weight rows w_base + 24k .. + 23 from the weight buffer into the array;
//   2. stream the n_vec vectors src + i through the array, one per cycle, adding the
//      partial sums of the earlier tiles kept in a 40-bit accumulator store;
//   3. wait for the last result. Results of the last tile go through the scalar unit
//      (requantise by `shift`, ReLU if act = SU_RELU) and are written to dst + i;
//      the 24 outputs fill channels 0..23 of the word, channels 24..31 are zero.
// CMD_POOL: for each i, reads src + i and src_b + i on consecutive cycles and writes
//   their lane-wise maximum to dst + i (32 channels).
//
// Interface and timing: a command is taken with cmd_valid while idle; `busy` is high
// until `done` pulses. A dense layer takes about k_tiles * (24 + n_vec + 2*24 + 3) cycles;
// a pool pass 2*n_vec + 3. Buffer and weight reads are registered (1 cycle).
module mlp_sequencer
  import cicero_pkg::*;
#(
  parameter int unsigned N         = SA_N,
  parameter int unsigned ACC_DEPTH = RIT_ENTRIES
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cmd_valid,
  input  layer_cmd_t                  cmd,
  output logic                        busy,
  output logic                        done,
  // weight buffer
  output logic                        wb_re,
  output logic [WB_AW-1:0]            wb_raddr,
  input  logic [N-1:0][DATA_W-1:0]    wb_rdata,
  // systolic array
  output logic                        sa_w_we,
  output logic [$clog2(N)-1:0]        sa_w_row,
  output logic [N-1:0][DATA_W-1:0]    sa_w_data,
  output logic                        sa_in_valid,
  output logic [N-1:0][DATA_W-1:0]    sa_in_vec,
  output logic [N-1:0][ACC_W-1:0]     sa_in_psum,
  input  logic                        sa_out_valid,
  input  logic [N-1:0][ACC_W-1:0]     sa_out_vec,
  // scalar unit
  output su_op_e                      su_op,
  output logic [4:0]                  su_shift,
  output logic [NBANK-1:0][ACC_W-1:0] su_a,
  output logic [NBANK-1:0][ACC_W-1:0] su_b,
  input  logic [NBANK-1:0][DATA_W-1:0] su_y,
  // global feature buffer, NPU half
  output logic                        gfb_re,
  output logic [GFB_AW-1:0]           gfb_raddr,
  input  fvec_t                       gfb_rdata,
  output logic                        gfb_we,
  output logic [GFB_AW-1:0]           gfb_waddr,
  output fvec_t                       gfb_wdata
);

  localparam int unsigned RW = $clog2(N);
  localparam int unsigned VW = 8;                     // vector counters, n_vec <= 255
  localparam int unsigned XW = $clog2(ACC_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_LOADW, S_STREAM, S_DRAIN, S_POOL, S_PWAIT, S_DONE} state_e;
  state_e      state;
  layer_cmd_t  c_q;
  logic [1:0]  kt;
  logic [RW:0] r;                // weight row being read
  logic [VW-1:0] i, j;           // vectors issued / results received
  logic        last_tile;

  // accumulator store for partial sums between input tiles
  logic [N-1:0][ACC_W-1:0] acc_mem [ACC_DEPTH];
  logic [N-1:0][ACC_W-1:0] acc_rdata;

  // one-cycle-delayed controls for registered reads
  logic        wl_v;             // weight row read in flight
  logic [RW-1:0] wl_row;
  logic        rd_v;             // stream read in flight
  logic        pa_v, pb_v;       // pool operand reads in flight
  fvec_t       pool_a;

  assign last_tile = (kt == c_q.k_tiles - 2'd1);
  assign busy      = (state != S_IDLE);

  // ---- read requests ----
  always_comb begin
    wb_re     = (state == S_LOADW) && (r < (RW+1)'(N));
    wb_raddr  = c_q.w_base + WB_AW'(kt) * WB_AW'(N) + WB_AW'(r);
    gfb_re    = 1'b0;
    gfb_raddr = c_q.src + GFB_AW'(i);
    if (state == S_STREAM) gfb_re = 1'b1;
    if (state == S_POOL) begin
      gfb_re    = 1'b1;
      gfb_raddr = pa_v ? (c_q.src_b + GFB_AW'(j)) : (c_q.src + GFB_AW'(i));
    end
  end

  // ---- array feed ----
  always_comb begin
    sa_w_we   = wl_v;
    sa_w_row  = wl_row;
    sa_w_data = wb_rdata;
    sa_in_valid = rd_v;
    for (int k = 0; k < N; k++) begin
      int unsigned ch;
      ch = int'(kt) * N + k;
      sa_in_vec[k]  = (ch < NBANK) ? gfb_rdata[ch] : '0;
      sa_in_psum[k] = (kt == 2'd0) ? '0 : acc_rdata[k];
    end
  end

  // ---- scalar unit and write-back ----
  always_comb begin
    su_shift = c_q.shift;
    su_a     = '0;
    su_b     = '0;
    if (state == S_POOL || state == S_PWAIT) begin
      su_op = SU_MAX;
      for (int k = 0; k < NBANK; k++) begin
        su_a[k] = ACC_W'($signed(pool_a[k]));
        su_b[k] = ACC_W'($signed(gfb_rdata[k]));
      end
    end else begin
      su_op = (c_q.act == SU_RELU) ? SU_RELU : SU_PASS;
      for (int k = 0; k < N; k++) su_a[k] = sa_out_vec[k];
    end
    gfb_wdata = '0;
    for (int k = 0; k < NBANK; k++)
      if (state == S_POOL || state == S_PWAIT || k < N) gfb_wdata[k] = su_y[k];
    gfb_we    = (sa_out_valid && last_tile && (state == S_STREAM || state == S_DRAIN))
              || pb_v;
    gfb_waddr = c_q.dst + GFB_AW'(j);
  end

  always_ff @(posedge clk) begin
    if (sa_out_valid && !last_tile) acc_mem[XW'(j)] <= sa_out_vec;
    acc_rdata <= acc_mem[XW'(i)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      c_q    <= '0;
      kt     <= '0;
      r      <= '0;
      i      <= '0;
      j      <= '0;
      wl_v   <= 1'b0;
      wl_row <= '0;
      rd_v   <= 1'b0;
      pa_v   <= 1'b0;
      pb_v   <= 1'b0;
      pool_a <= '0;
      done   <= 1'b0;
    end else begin
      done   <= 1'b0;
      wl_v   <= wb_re;
      wl_row <= RW'(r);
      rd_v   <= (state == S_STREAM);
      pa_v   <= 1'b0;
      pb_v   <= pa_v;
      if (pa_v) pool_a <= gfb_rdata;          // first operand has arrived
      if (sa_out_valid || pb_v) j <= j + 1'b1;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c_q <= cmd;
          kt  <= '0;
          r   <= '0;
          i   <= '0;
          j   <= '0;
          state <= (cmd.op == CMD_POOL) ? S_POOL : S_LOADW;
        end
        S_LOADW: begin
          r <= r + 1'b1;
          if (r == (RW+1)'(N)) state <= S_STREAM;   // last row written this cycle
        end
        S_STREAM: begin
          i <= i + 1'b1;
          if (i == c_q.n_vec - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (j == c_q.n_vec) begin
            if (last_tile) state <= S_DONE;
            else begin
              kt <= kt + 2'd1;
              r  <= '0;
              i  <= '0;
              j  <= '0;
              state <= S_LOADW;
            end
          end
        end
        S_POOL: begin
          // even cycles read operand a, odd cycles operand b
          if (!pa_v) pa_v <= 1'b1;
          else begin
            i <= i + 1'b1;
            if (i == c_q.n_vec - 1'b1) state <= S_PWAIT;
          end
        end
        S_PWAIT: if (j == c_q.n_vec) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_batch_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && cmd_valid && cmd.op == CMD_DENSE) |->
      (cmd.n_vec != 0) && (32'(cmd.n_vec) <= ACC_DEPTH) && (cmd.k_tiles != 0));

endmodule
