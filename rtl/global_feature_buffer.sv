// global_feature_buffer: the NPU's double-buffered 1.5 MB global feature buffer.
//
// Two halves of 768 KB. The Gathering Unit writes interpolated feature vectors into
// the half named by gu_sel while the MLP datapath reads and writes the other half; a
// `swap` pulse exchanges them, so gathering of the next batch overlaps the MLP of the
// current one. A word is one 32-channel feature vector (64 bytes); an address is
// {granule, word}: 24 granules of 32 KB (512 words) per half, 12288 words.
// Writes to addresses past the last granule are dropped (and asserted against).
//
// Interface and timing: one GU write and one NPU write per cycle, each into its own
// half; one NPU read per cycle, registered (data the cycle after np_re).
// Size and 32 KB granularity follow the paper; word width, port set and addressing are
// this design's choices.
module global_feature_buffer
  import cicero_pkg::*;
#(
  parameter int unsigned BYTES = GFB_BYTES,
  parameter int unsigned GRAN  = GFB_GRAN,
  parameter int unsigned WBITS = NBANK * FEAT_W
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   swap,
  output logic                                   gu_sel,
  input  logic                                   gu_we,
  input  logic [$clog2(BYTES/2/(WBITS/8))-1:0]   gu_addr,
  input  logic [WBITS-1:0]                       gu_wdata,
  input  logic                                   np_we,
  input  logic [$clog2(BYTES/2/(WBITS/8))-1:0]   np_waddr,
  input  logic [WBITS-1:0]                       np_wdata,
  input  logic                                   np_re,
  input  logic [$clog2(BYTES/2/(WBITS/8))-1:0]   np_raddr,
  output logic [WBITS-1:0]                       np_rdata
);

  localparam int unsigned WORDS = BYTES / 2 / (WBITS / 8);   // per half
  localparam int unsigned AW    = $clog2(WORDS);
  localparam int unsigned GWORDS = GRAN / (WBITS / 8);        // words per granule

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gu_sel <= 1'b0;
    else if (swap) gu_sel <= ~gu_sel;
  end

  logic [1:0][WBITS-1:0] rdata_h;

  for (genvar h = 0; h < 2; h++) begin : g_half
    logic [WBITS-1:0] mem [WORDS];
    logic             we;
    logic [AW-1:0]    wa;
    logic [WBITS-1:0] wd;

    always_comb begin
      if (gu_sel == 1'(h)) begin
        we = gu_we; wa = gu_addr;  wd = gu_wdata;
      end else begin
        we = np_we; wa = np_waddr; wd = np_wdata;
      end
    end

    always_ff @(posedge clk) begin
      if (we && (32'(wa) < WORDS)) mem[wa] <= wd;
      if (np_re && (gu_sel != 1'(h))) rdata_h[h] <= mem[np_raddr];
    end
  end

  // Read data comes from the half the NPU owned when the read was issued.
  logic rd_half;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_half <= 1'b0;
    else if (np_re) rd_half <= ~gu_sel;
  end
  assign np_rdata = rdata_h[rd_half];

  a_gu_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    gu_we |-> 32'(gu_addr) < WORDS);
  a_np_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    np_we |-> 32'(np_waddr) < WORDS);

  // GWORDS documents the {granule, word} split of an address.
  if (GWORDS * (WORDS / GWORDS) != WORDS) begin : g_bad_gran
    $error("half size must be a whole number of granules");
  end

endmodule
