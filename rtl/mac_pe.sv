// mac_pe: one multiply-accumulate cell of the weight-stationary systolic array.
//
// The cell keeps one weight (loaded with w_load). Each cycle it passes the activation it
// receives from the left on to the right, and passes down the partial sum from above
// plus weight x activation. Both outputs are registered, so a value moves one cell per
// cycle. A valid bit travels with the activation; without a valid input the cell sends
// down a zero sum.
// Widths are this design's choice: 16-bit signed operands, 40-bit partial sums.
module mac_pe #(
  parameter int unsigned DW = 16,
  parameter int unsigned AW = 40
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_load,
  input  logic signed [DW-1:0] w_in,
  input  logic                 v_in,
  input  logic signed [DW-1:0] a_in,
  input  logic signed [AW-1:0] p_in,
  output logic                 v_out,
  output logic signed [DW-1:0] a_out,
  output logic signed [AW-1:0] p_out
);

  logic signed [DW-1:0]   w_q;
  logic signed [2*DW-1:0] prod;

  assign prod = a_in * w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q   <= '0;
      v_out <= 1'b0;
      a_out <= '0;
      p_out <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      v_out <= v_in;
      a_out <= a_in;
      p_out <= v_in ? p_in + AW'(prod) : '0;
    end
  end

endmodule
