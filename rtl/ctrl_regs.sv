// ctrl_regs: control registers that hold a run's settings steady.
//
// cfg_load (asserted through configuration mode) captures beta_initial
// and the anneal rate. run_load (one clock when a run starts) captures
// N_m, N_s and the debug flag from the instruction; N_m is clamped to the
// number of p-bits N. The same clock loads col_en, a thermometer mask
// with bit c set for c < N_m: the field of a p-bit sums J_ij m_j over
// j < N_m only, so the adder trees must not see columns beyond N_m.
// Synchronous, active-high reset to zero. The published design only names
// its control registers; what they hold, the clamp and the column mask
// are this design's choices.
module ctrl_regs
  import pccop_pkg::*;
#(
  parameter int unsigned N = 2048
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              cfg_load,
  input  logic [BETA_W-1:0] beta_initial_in,
  input  logic [BETA_W-1:0] anneal_rate_in,
  input  logic              run_load,
  input  instr_t            instr,
  output logic [BETA_W-1:0] beta_initial,
  output logic [BETA_W-1:0] anneal_rate,
  output logic [CNT_W-1:0]  nm,
  output logic [CNT_W-1:0]  ns,
  output logic              debug,
  output logic [N-1:0]      col_en
);
  logic [CNT_W-1:0] nm_clamped;
  assign nm_clamped = (instr.nm > CNT_W'(N)) ? CNT_W'(N) : instr.nm;

  always_ff @(posedge clk) begin
    if (rst) begin
      beta_initial <= '0;
      anneal_rate  <= '0;
      nm           <= '0;
      ns           <= '0;
      debug        <= 1'b0;
      col_en       <= '0;
    end else begin
      if (cfg_load) begin
        beta_initial <= beta_initial_in;
        anneal_rate  <= anneal_rate_in;
      end
      if (run_load) begin
        nm    <= nm_clamped;
        ns    <= instr.ns;
        debug <= instr.debug;
        for (int c = 0; c < N; c++) col_en[c] <= (CNT_W'(c) < nm_clamped);
      end
    end
  end
endmodule
