// pc_cop_top: the pc-COP probabilistic-computing accelerator for max-cut
// and other Ising-form problems, N = 2048 fully connected p-bits with a
// K = 4-way pseudo-parallel update core.
//
// Blocks: instr_reg (32-bit instruction), ctrl_regs (run settings),
// pcircuit_fsm (sequencing), j_mem with j_addr_decoder (2-bit J matrix,
// 8 Mb in K banks), m_reg (p-bit state), anneal_unit (beta schedule) and
// pbit_update_core (adder trees, speculative paths, select).
//
// Use:
//   1. config=1 (start=0): every clock J_data_in is written to word J_addr
//      of J, m_initial is loaded into the state, the seeds into the LFSRs
//      and beta_initial / beta_anneal_rate into the control registers.
//      config_mode is high while this mode is active.
//   2. config=0 with a non-zero start field, N_m and N_s: one run of N_s
//      samples over p-bits 1..N_m. It takes 1 + (ceil(N_m/K) + 1) * N_s
//      clocks from the instruction register's output to done.
//   3. done rises and stays; m_final shows the final state (0 = -1,
//      1 = +1) from the same clock on, and keeps showing it through the
//      next run until that run is done. With the debug bit set for a run, m_final instead follows
//      the state register live.
// All inputs are sampled on the rising clock edge; rst is synchronous and
// active high. The instruction passes through instr_reg, so it acts one
// clock after it is applied. Ports and widths follow the published
// top-level diagram; the protocol on them is this design's own.
module pc_cop_top
  import pccop_pkg::*;
#(
  parameter int unsigned N     = 2048,
  parameter int unsigned K     = 4,
  parameter int unsigned GRP_W = (N / K > 1) ? $clog2(N / K) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [JDATA_W-1:0] J_data_in,
  input  logic [JADDR_W-1:0] J_addr,
  input  logic [N-1:0]       m_initial,
  input  logic [SEED_W-1:0]  seed,
  input  logic [BETA_W-1:0]  beta_initial,
  input  logic [BETA_W-1:0]  beta_anneal_rate,
  input  logic [INSTR_W-1:0] instruction,
  output logic [N-1:0]       m_final,
  output logic               config_mode,
  output logic               done
);
  instr_t            instr;
  state_t            state;
  logic              run_load, fetch, update, beta_update;
  logic [GRP_W-1:0]  group, rd_addr;
  logic [K-1:0]      lane_mask, m_new;
  logic [BETA_W-1:0] beta_init_q, rate_q, beta;
  logic [CNT_W-1:0]  nm, ns;
  logic              debug;
  logic [K*2*N-1:0]  j_rows;
  logic [N-1:0]      m_state, m_final_q, col_en;
  logic [K*2*N-1:0]  j_rows_used;

  instr_reg u_instr (.clk(clk), .rst(rst), .instruction(instruction), .instr(instr));

  ctrl_regs #(.N(N)) u_ctrl (
    .clk(clk), .rst(rst), .cfg_load(config_mode),
    .beta_initial_in(beta_initial), .anneal_rate_in(beta_anneal_rate),
    .run_load(run_load), .instr(instr),
    .beta_initial(beta_init_q), .anneal_rate(rate_q), .nm(nm), .ns(ns), .debug(debug), .col_en(col_en));

  pcircuit_fsm #(.N(N), .K(K)) u_fsm (
    .clk(clk), .rst(rst), .instr(instr), .nm(nm), .ns(ns),
    .state(state), .cfg_mode(config_mode), .run_load(run_load), .fetch(fetch),
    .update(update), .beta_update(beta_update), .group(group), .rd_addr(rd_addr),
    .lane_mask(lane_mask), .done(done));

  j_mem #(.N(N), .K(K)) u_jmem (
    .clk(clk), .wr_en(config_mode), .wr_addr(J_addr), .wr_data(J_data_in),
    .rd_addr(rd_addr), .rd_rows(j_rows));

  m_reg #(.N(N), .K(K)) u_mreg (
    .clk(clk), .rst(rst), .load(config_mode), .m_init(m_initial),
    .upd_en(update), .upd_group(group), .upd_bits(m_new), .upd_mask(lane_mask),
    .m(m_state));

  // beta starts from beta_initial on the clock after run_load, i.e. in
  // the first FETCH, where the ctrl_regs copy is already valid.
  anneal_unit u_anneal (
    .clk(clk), .rst(rst), .load(run_load), .update(beta_update),
    .beta_initial(config_mode ? beta_initial : beta_init_q),
    .anneal_rate(rate_q), .beta(beta));

  // The field sums over columns j < N_m only: J entries beyond N_m read as
  // zero, whatever the memory holds there.
  for (genvar r = 0; r < K; r++) begin : g_rowmask
    for (genvar c = 0; c < N; c++) begin : g_col
      assign j_rows_used[r*2*N + 2*c +: 2] = col_en[c] ? j_rows[r*2*N + 2*c +: 2] : 2'b00;
    end
  end

  pbit_update_core #(.N(N), .K(K)) u_core (
    .clk(clk), .rst(rst), .lfsr_load(config_mode), .seed(seed), .step(update),
    .j_rows(j_rows_used), .m(m_state), .group(group), .beta(beta), .m_new(m_new));

  always_ff @(posedge clk) begin
    if (rst)       m_final_q <= '0;
    else if (done) m_final_q <= m_state;
  end
  // In DONE the state register is the result; the copy keeps it visible
  // while the next run changes the state register.
  assign m_final = (debug || done) ? m_state : m_final_q;

  // state must be one of the encoded phases
  always_ff @(posedge clk) if (!rst) assert (state inside {ST_IDLE, ST_CONFIG, ST_FETCH, ST_UPDATE, ST_DONE})
    else $error("pc_cop_top: illegal controller state");
endmodule
