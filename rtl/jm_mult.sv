// jm_mult: product of one 2-bit J coefficient and one p-bit.
//
// J uses 11/00/01 for -1/0/+1 and the p-bit uses 0/1 for -1/+1; the
// product comes out in the J encoding. It follows the published truth
// table row by row: a zero coefficient gives 00, otherwise the product is
// +1 (01) when the sign of J agrees with the p-bit and -1 (11) when it does
// not. The unused J code 10 is treated as zero. Purely combinational.
module jm_mult (
  input  logic [1:0] j,
  input  logic       m,
  output logic [1:0] p
);
  always_comb begin
    unique case (j)
      2'b01:   p = m ? 2'b01 : 2'b11;   // +1 * m
      2'b11:   p = m ? 2'b11 : 2'b01;   // -1 * m
      default: p = 2'b00;
    endcase
  end
endmodule
