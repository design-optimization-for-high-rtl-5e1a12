// systolic_pe: one multiply-accumulate cell of the weight-stationary array.
//
// The cell holds one weight. Each cycle it passes its activation input one
// cell to the right (registered) and passes down the partial sum from the
// cell above plus activation x weight (registered). The weight register is
// written when w_load is high. The cell is never stalled: the array runs
// every cycle and the valid bits travel beside the data in systolic_array.
// Partial sums carry full precision; scaling happens below the array.
module systolic_pe #(
  parameter int DATA_W = 16,
  parameter int ACC_W  = 38
) (
  input  logic                     clk,
  input  logic                     w_load,
  input  logic signed [DATA_W-1:0] w_in,
  input  logic signed [DATA_W-1:0] a_in,
  input  logic signed [ACC_W-1:0]  p_in,
  output logic signed [DATA_W-1:0] a_out,
  output logic signed [ACC_W-1:0]  p_out
);
  logic signed [DATA_W-1:0]   w_q;
  logic signed [2*DATA_W-1:0] prod;

  assign prod = a_in * w_q;

  always_ff @(posedge clk) begin
    if (w_load) w_q <= w_in;
    a_out <= a_in;
    p_out <= p_in + ACC_W'(prod);
  end
endmodule
