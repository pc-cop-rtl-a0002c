// anneal_unit: the beta register and the annealing-schedule multiplier.
//
// load sets beta to beta_initial; update multiplies it by the anneal rate,
// so sample s of a run sees beta_s = beta_initial * rate^(s-1). Both values
// are unsigned Q4.20; the 48-bit product is truncated back to Q4.20 and
// saturates at the largest Q4.20 value instead of wrapping. One
// multiplier serves all update paths. Synchronous, active-high reset to 0;
// load wins over update. The schedule, the Q4.20 format and the single
// shared multiplier follow the published design; truncation and
// saturation are this design's choice.
module anneal_unit
  import pccop_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              load,
  input  logic              update,
  input  logic [BETA_W-1:0] beta_initial,
  input  logic [BETA_W-1:0] anneal_rate,
  output logic [BETA_W-1:0] beta
);
  logic [2*BETA_W-1:0] prod;
  logic [BETA_W-1:0]   next_beta;

  assign prod = beta * anneal_rate;   // Q8.40

  always_comb begin
    if (prod[2*BETA_W-1 -: (BETA_W-FRAC_W)] != '0) next_beta = '1;
    else next_beta = prod[FRAC_W +: BETA_W];
  end

  always_ff @(posedge clk) begin
    if (rst)         beta <= '0;
    else if (load)   beta <= beta_initial;
    else if (update) beta <= next_beta;
  end
endmodule
