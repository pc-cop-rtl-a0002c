// beta_multiplier: scales an adder-tree sum by the inverse
// pseudo-temperature, I = beta * sum.
//
// beta is unsigned Q4.20 and the sum is a signed integer, so the product
// is a signed number with 20 fraction bits. It is kept at full width
// (SUM_W + 25 bits) so that the activation clamp that follows compares
// it exactly. Combinational. The product I = beta * sum is the published
// one; keeping it at full width is this design's choice.
module beta_multiplier
  import pccop_pkg::*;
#(
  parameter int unsigned SUM_W = 13,
  parameter int unsigned OUT_W = SUM_W + BETA_W + 1
) (
  input  logic [BETA_W-1:0]        beta,
  input  logic signed [SUM_W-1:0]  sum,
  output logic signed [OUT_W-1:0]  i_out
);
  logic signed [BETA_W:0] beta_s;
  assign beta_s = signed'({1'b0, beta});
  assign i_out  = OUT_W'(beta_s * sum);
endmodule
