// pbit_path: one speculative p-bit update path.
//
// Chains the four per-path units of a p-bit update:
//   I = beta * sum            (beta_multiplier)
//   a = activation(I)         (piecewise linear, T = 1)
//   r = LFSR state            (own 21-bit LFSR, signed Q1.20)
//   m' = (a > r)              (comparator, 1 = +1)
// sum, beta and m' are combinational; the LFSR advances on step and is
// seeded on load. A k-way update core holds 2^k - 1 of these paths.
// The published design names these four units per path; grouping them in
// one helper module is this design's choice.
module pbit_path
  import pccop_pkg::*;
#(
  parameter int unsigned SUM_W = 14
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     lfsr_load,
  input  logic [LFSR_W-1:0]        lfsr_seed,
  input  logic                     step,
  input  logic [BETA_W-1:0]        beta,
  input  logic signed [SUM_W-1:0]  sum,
  output logic                     m_new
);
  localparam int unsigned I_W = SUM_W + BETA_W + 1;

  logic signed [I_W-1:0]   i_val;
  logic signed [ACT_W-1:0] act;
  logic [LFSR_W-1:0]       rnd;

  beta_multiplier #(.SUM_W(SUM_W)) u_bmul (.beta(beta), .sum(sum), .i_out(i_val));
  activation      #(.IN_W(I_W), .T_LOG2(0)) u_act (.in_val(i_val), .out_val(act));
  lfsr            u_lfsr (.clk(clk), .rst(rst), .load(lfsr_load), .seed(lfsr_seed),
                          .step(step), .q(rnd));
  comparator      u_cmp (.act(act), .rnd(rnd), .m_new(m_new));
endmodule
