// lfsr: 21-bit Fibonacci linear feedback shift register, the source of
// rand(-1,+1) for one p-bit update path.
//
// The register shifts toward bit 20; the XOR of bits 20, 19, 18 and 15
// enters bit 0 (the tap positions of the published circuit). Its state,
// read as a signed Q1.20 number, is the random value in [-1, +1).
// load copies the seed in (a zero seed, which would lock the register,
// is replaced by 1); step advances one state per clock. Load wins over
// step. Synchronous, active-high reset to 1.
module lfsr
  import pccop_pkg::*;
#(
  parameter int unsigned W = LFSR_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load,
  input  logic [W-1:0] seed,
  input  logic         step,
  output logic [W-1:0] q
);
  logic fb;
  assign fb = q[20] ^ q[19] ^ q[18] ^ q[15];

  always_ff @(posedge clk) begin
    if (rst)       q <= W'(1);
    else if (load) q <= (seed == '0) ? W'(1) : seed;
    else if (step) q <= {q[W-2:0], fb};
  end

  initial assert (W == 21) else $error("lfsr: the tap set is for 21 bits");
endmodule
