// reducer: trilinear interpolation of one feature channel of one ray sample.
//
// The eight corner features of the sample's voxel arrive one per cycle, each with its
// trilinear weight. The reducer multiplies and accumulates them; on the last corner it
// rounds the sum back to the feature format and presents it for one cycle.
// The Gathering Unit holds B x M reducers: one per VFT bank (channel) and read port.
//
// Formats (this design's choice, the paper gives none): features are 16-bit signed
// fixed point, weights unsigned Q0.16 fractions, so
//   out = saturate16( floor( (sum_v w_v * f_v + 2^15) / 2^16 ) ).
// Timing: in_valid with first starts a new sum; out_valid is high the cycle after the
// in_valid cycle that carried last, and out holds its value until the next result.
module reducer #(
  parameter int unsigned FW = 16,
  parameter int unsigned WW = 16,
  parameter int unsigned NV = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic signed [FW-1:0] feat,
  input  logic        [WW-1:0] w,
  output logic                 out_valid,
  output logic signed [FW-1:0] out
);

  localparam int unsigned PW = FW + WW + 1;           // signed product
  localparam int unsigned SW = PW + $clog2(NV) + 1;   // sum of NV products
  localparam logic signed [SW-1:0] MAXV = SW'((64'sd1 <<< (FW - 1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(64'sd1 <<< (FW - 1));

  logic signed [SW-1:0] acc, sum_next, rounded;
  logic signed [PW-1:0] prod;

  always_comb begin
    prod     = PW'(feat) * $signed({1'b0, w});
    sum_next = (first ? '0 : acc) + SW'(prod);
    rounded  = (sum_next + (SW'(1) <<< (WW - 1))) >>> WW;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        acc <= sum_next;
        if (last) begin
          if (rounded > MAXV)      out <= MAXV[FW-1:0];
          else if (rounded < MINV) out <= MINV[FW-1:0];
          else                     out <= rounded[FW-1:0];
        end
      end
    end
  end

endmodule
