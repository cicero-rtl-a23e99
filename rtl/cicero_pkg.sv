// cicero_pkg: sizes and shared types of the Cicero NPU with its Gathering Unit.
//
// The Gathering Unit (GU) performs the feature-gathering stage of NeRF rendering in
// memory-centric order: one macro voxel (MVoxel, 8x8x8 vertices) of vertex features sits
// in the Vertex Feature Table (VFT) while every ray sample that falls into it is
// interpolated. Ray samples are described by Ray Index Table (RIT) entries.
//
// Sizes that follow the paper: 128 RIT entries of 48 bytes (eight 32-bit vertex IDs and
// eight 16-bit weights), B = 32 VFT banks with M = 2 read ports, 8x8x8-point MVoxels,
// a 24x24 MAC array, a 1.5 MB double-buffered global feature buffer with 32 KB
// granularity and a 96 KB weight buffer.
// Choices of this design: 16-bit signed fixed-point features and MLP weights,
// unsigned Q0.16 interpolation weights, 40-bit accumulators, 64-byte buffer words.
package cicero_pkg;

  // ---------------- Gathering Unit ----------------
  localparam int unsigned NVERT       = 8;     // vertices per voxel
  localparam int unsigned RIT_ENTRIES = 128;   // entries per RIT half
  localparam int unsigned RIT_IW      = $clog2(RIT_ENTRIES);
  localparam int unsigned VID_W       = 32;    // vertex index, 4 bytes
  localparam int unsigned IW_W        = 16;    // interpolation weight, 2 bytes (Q0.16)
  localparam int unsigned NBANK       = 32;    // B: VFT banks = channels per segment
  localparam int unsigned NPORT       = 2;     // M: read ports per bank
  localparam int unsigned MV_POINTS   = 512;   // 8x8x8 vertices per MVoxel
  localparam int unsigned VFT_AW      = $clog2(MV_POINTS);
  localparam int unsigned FEAT_W      = 16;    // one feature channel

  typedef struct packed {
    logic [NVERT-1:0][VID_W-1:0] vid;  // vid[v]: global vertex ID of corner v
    logic [NVERT-1:0][IW_W-1:0]  w;    // w[v]:   trilinear weight of corner v
  } rit_entry_t;                        // 8*32 + 8*16 = 384 bits = 48 bytes

  typedef logic [NBANK-1:0][FEAT_W-1:0] fvec_t;  // one 32-channel feature vector

  // ---------------- NPU ----------------
  localparam int unsigned SA_N      = 24;   // systolic array is SA_N x SA_N
  localparam int unsigned DATA_W    = 16;   // MLP activations and weights
  localparam int unsigned ACC_W     = 40;   // partial sums
  localparam int unsigned GFB_BYTES = 1536 * 1024;
  localparam int unsigned GFB_GRAN  = 32 * 1024;
  localparam int unsigned GFB_WORDB = NBANK * FEAT_W / 8;          // 64-byte word
  localparam int unsigned GFB_HALF_WORDS = GFB_BYTES / 2 / GFB_WORDB; // 12288
  localparam int unsigned GFB_AW    = $clog2(GFB_HALF_WORDS);       // 14
  localparam int unsigned WB_BYTES  = 96 * 1024;
  localparam int unsigned WB_ROWS   = WB_BYTES / (SA_N * DATA_W / 8); // 2048
  localparam int unsigned WB_AW     = $clog2(WB_ROWS);

  typedef logic [SA_N-1:0][DATA_W-1:0] avec_t;   // 24 activations / one weight row
  typedef logic [SA_N-1:0][ACC_W-1:0]  pvec_t;   // 24 partial sums

  typedef enum logic [1:0] {
    SU_PASS = 2'd0,   // requantise only
    SU_RELU = 2'd1,   // requantise, then max(0, x)
    SU_MAX  = 2'd2    // lane-wise max of two vectors (max pooling)
  } su_op_e;

  typedef enum logic {
    CMD_DENSE = 1'b0, // y = act(W^T x) over a batch of vectors
    CMD_POOL  = 1'b1  // y = max(x[src_a + i], x[src_b + i])
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e           op;
    su_op_e            act;      // SU_PASS or SU_RELU for CMD_DENSE
    logic [4:0]        shift;    // requantisation shift
    logic [1:0]        k_tiles;  // input tiles of 24 (1 or 2 cover 32 channels)
    logic [7:0]        n_vec;    // vectors in the batch, 1..128
    logic [GFB_AW-1:0] src;      // first input vector
    logic [GFB_AW-1:0] src_b;    // second operand base for CMD_POOL
    logic [GFB_AW-1:0] dst;      // first output vector
    logic [WB_AW-1:0]  w_base;   // first weight row of tile 0 (tile k at +24k)
  } layer_cmd_t;

endpackage
