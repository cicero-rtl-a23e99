// scalar_unit: the NPU's element-wise unit (ReLU and max pooling).
//
// Combinational, N lanes. Every lane requantises a wide accumulator value to 16 bits:
//   q(x) = saturate16( (x + 2^(shift-1)) >>> shift )   (no rounding term when shift = 0)
// and then applies the operation:
//   SU_PASS  y = q(a)
//   SU_RELU  y = max(0, q(a))
//   SU_MAX   y = q(max(a, b))        lane-wise maximum of two vectors (max pooling)
// The paper names the unit and its two operations; the requantisation, the rounding
// and the two-operand form of max pooling are this design's choices.
module scalar_unit
  import cicero_pkg::*;
#(
  parameter int unsigned N  = NBANK,
  parameter int unsigned AW = ACC_W,
  parameter int unsigned DW = DATA_W
) (
  input  su_op_e                 op,
  input  logic [4:0]             shift,
  input  logic [N-1:0][AW-1:0]   a,
  input  logic [N-1:0][AW-1:0]   b,
  output logic [N-1:0][DW-1:0]   y
);

  localparam logic signed [AW-1:0] MAXV = AW'((64'sd1 <<< (DW - 1)) - 1);
  localparam logic signed [AW-1:0] MINV = -AW'(64'sd1 <<< (DW - 1));

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [AW-1:0] x, r;
      x = (op == SU_MAX && $signed(b[i]) > $signed(a[i])) ? b[i] : a[i];
      r = (shift == 5'd0) ? x : ((x + (AW'(1) <<< (shift - 5'd1))) >>> shift);
      if (r > MAXV)      r = MAXV;
      else if (r < MINV) r = MINV;
      if (op == SU_RELU && r < 0) r = '0;
      y[i] = r[DW-1:0];
    end
  end

endmodule
