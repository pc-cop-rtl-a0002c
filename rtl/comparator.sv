// comparator: the sgn() of a p-bit update.
//
// Compares the activation output (signed Q2.20, + input) with the LFSR
// value (signed Q1.20, - input) and outputs 1 (p-bit +1) when the
// activation is strictly larger, else 0 (p-bit -1). Because the LFSR value
// is spread evenly over [-1, +1), the output is 1 with probability
// (1 + act) / 2, as sgn(rand + act) is. The LFSR value is sign-extended to
// the activation's 22 bits so that an activation of exactly +1 always
// wins. Combinational. A signed comparator whose 0/1 output is the new
// p-bit follows the published design. The published diagram labels it
// 21-bit; 22 bits are used here because the activation output is 22 bits
// wide. The strict comparison (a tie gives -1) is this design's choice.
module comparator
  import pccop_pkg::*;
(
  input  logic signed [ACT_W-1:0]  act,
  input  logic        [LFSR_W-1:0] rnd,
  output logic                     m_new
);
  logic signed [ACT_W-1:0] rnd_ext;
  assign rnd_ext = ACT_W'(signed'(rnd));
  assign m_new   = act > rnd_ext;
endmodule
