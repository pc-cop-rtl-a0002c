// instr_reg: the 32-bit instruction register.
//
// Registers the instruction input every clock and presents it decoded as
// instr_t: start [31:28], config [27], debug [26], Nm [25:13], Ns [12:0].
// The field order and widths are those of the published format; the bit
// positions follow from packing them MSB first. Synchronous, active-high
// reset to zero (no start, no config).
module instr_reg
  import pccop_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic [INSTR_W-1:0] instruction,
  output instr_t             instr
);
  always_ff @(posedge clk) begin
    if (rst) instr <= '0;
    else     instr <= instr_t'(instruction);
  end
endmodule
