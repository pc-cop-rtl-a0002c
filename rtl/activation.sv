// activation: piecewise-linear approximation of tanh.
//
//   out = -1        if in <= -T
//   out = in / T    if -T < in < +T
//   out = +1        if in >= +T
//
// The input is a signed number with 20 fraction bits; the output is signed
// Q2.20 (sign, one integer bit, 20 fraction bits). T = 2^T_LOG2, so the
// division is an arithmetic right shift. T = 1 (approximation A1) is the
// default, the variant the design uses; T = 2 and 4 give A2 and A4.
// Combinational. The formula, T in {1, 2, 4}, the shift and the 22-bit
// output follow the published design; the full-precision input is this
// design's choice.
module activation
  import pccop_pkg::*;
#(
  parameter int unsigned IN_W   = 38,
  parameter int unsigned T_LOG2 = 0
) (
  input  logic signed [IN_W-1:0]  in_val,
  output logic signed [ACT_W-1:0] out_val
);
  localparam logic signed [IN_W-1:0]  T_POS   = IN_W'(1) <<< (FRAC_W + T_LOG2);
  localparam logic signed [IN_W-1:0]  T_NEG   = -T_POS;
  localparam logic signed [ACT_W-1:0] ONE_POS = ACT_W'(1) <<< FRAC_W;
  localparam logic signed [ACT_W-1:0] ONE_NEG = -ONE_POS;

  logic signed [IN_W-1:0] scaled;
  assign scaled = in_val >>> T_LOG2;

  always_comb begin
    if (in_val <= T_NEG)      out_val = ONE_NEG;
    else if (in_val >= T_POS) out_val = ONE_POS;
    else                      out_val = scaled[ACT_W-1:0];
  end
endmodule
