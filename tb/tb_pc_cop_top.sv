// tb_pc_cop_top: end-to-end test of the accelerator at N = 64 p-bits,
// K = 4, against the sequential reference model.
//
// It configures J (a random +-1 max-cut graph, J = -w, zero diagonal)
// word by word through J_data_in / J_addr, the initial state, the seeds
// and the beta schedule, then issues four runs:
//   1. N_m = 64, N_s = 20:  full groups; final state compared bit for bit,
//      cycle count 2 + (N_m/4 + 1) N_s from instruction to done.
//   2. N_m = 30, N_s = 15:  a partial last group (masked lanes); p-bits
//      30..63 must not move; m_final must hold run 1's result until done.
//      J has non-zero entries in columns 30..63, which the field must
//      leave out (the column mask).
//   3. N_m = 64, N_s = 5, debug = 1: m_final must follow the state live.
//   4. N_s = 0: done without any update.
// It counts how often each mechanism occurred (configuration writes,
// selection of a speculative path, masked lanes, beta anneal steps, live
// debug output, an empty run, a held start not restarting, masked
// columns) and fails for
// any that never did.
module tb_pc_cop_top;
  import pccop_pkg::*;
  import pccop_ref_pkg::*;
  localparam int N = 64, K = 4;
  localparam int WPR = 2 * N / 32;                 // 32-bit words per row
  localparam int WORD_BITS = $clog2(WPR);

  logic clk = 0, rst = 1;
  logic [31:0]  J_data_in = '0;
  logic [17:0]  J_addr = '0;
  logic [N-1:0] m_initial, m_final;
  logic [511:0] seed;
  logic [23:0]  beta_initial, beta_anneal_rate;
  logic [31:0]  instruction = '0;
  logic config_mode, done;
  int checks = 0, failures = 0;
  int n_cfg_writes = 0, n_beta_steps = 0, n_debug_live = 0, n_empty = 0, n_norestart = 0,
      n_col_masked = 0;

  pc_cop_top #(.N(N), .K(K)) dut (
    .clk(clk), .rst(rst), .J_data_in(J_data_in), .J_addr(J_addr), .m_initial(m_initial),
    .seed(seed), .beta_initial(beta_initial), .beta_anneal_rate(beta_anneal_rate),
    .instruction(instruction), .m_final(m_final), .config_mode(config_mode), .done(done));
  always #5 clk = ~clk;
  always @(posedge clk) if (dut.beta_update) n_beta_steps++;
  // non-zero J entries beyond N_m hidden from the adder trees
  always @(posedge clk) if (dut.update && dut.j_rows_used != dut.j_rows) n_col_masked++;

  pcop_model model;

  initial begin
    #50000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [31:0] instr_word(int start, bit cfg, bit dbg, int nm, int ns);
    return {4'(start), cfg, dbg, 13'(nm), 13'(ns)};
  endfunction

  function automatic logic [N-1:0] model_state();
    logic [N-1:0] v;
    for (int c = 0; c < N; c++) v[c] = model.m[c];
    return v;
  endfunction

  task automatic configure();
    instruction = instr_word(0, 1, 0, 0, 0);
    while (!config_mode) @(negedge clk);
    for (int r = 0; r < N; r++)
      for (int w = 0; w < WPR; w++) begin
        logic [31:0] d;
        for (int e = 0; e < 16; e++) d[2*e +: 2] = jcode(model.j[r][16*w + e]);
        J_addr = 18'((r << WORD_BITS) | w); J_data_in = d;
        @(negedge clk);
        n_cfg_writes++;
      end
    instruction = '0;
    while (config_mode) @(negedge clk);
    model.seed_all(seed);
    for (int c = 0; c < N; c++) model.m[c] = m_initial[c];
  endtask

  // run and return the clocks from the instruction to done
  task automatic run(input int nm, input int ns, input bit dbg, output int cyc,
                     input logic [N-1:0] hold_val, input bit check_hold);
    logic [N-1:0] m_prev = m_final;
    cyc = 0;
    instruction = instr_word(1, 0, dbg, nm, ns);
    // done of the previous run stays up until the new run has started
    repeat (2) begin
      @(negedge clk);
      cyc++;
    end
    while (!done && cyc < 1000000) begin
      if (check_hold && !done && m_final !== hold_val) begin
        failures++; $display("FAIL m_final changed during a non-debug run");
      end
      if (dbg && !done && m_final !== m_prev) n_debug_live++;
      @(negedge clk);
      cyc++;
    end
    // hold start: no second run
    repeat (4) @(negedge clk);
    if (done && !dut.update) n_norestart++;
    instruction = '0;
    @(negedge clk);
  endtask

  initial begin
    int cyc, e0, e1;
    logic [N-1:0] res1;
    model = new(N, K);
    for (int a = 0; a < N; a++) begin
      model.j[a][a] = 0;
      for (int b = a + 1; b < N; b++) begin
        automatic int w = ($urandom_range(0, 3) == 0) ? ($urandom_range(0, 1) ? 1 : -1) : 0;
        model.j[a][b] = -w; model.j[b][a] = -w;
      end
    end
    for (int w = 0; w < 16; w++) seed[w*32 +: 32] = $urandom;
    for (int c = 0; c < N; c++) m_initial[c] = $urandom_range(0, 1);
    beta_initial     = 24'(longint'(0.1 * 1048576.0));
    beta_anneal_rate = 24'(longint'(1.15 * 1048576.0));
    repeat (3) @(negedge clk); rst = 0;
    @(negedge clk);
    chk(!done && !config_mode, "idle after reset");
    configure();
    chk(n_cfg_writes == N * WPR, "configuration writes");

    // run 1
    e0 = int'(model.energy(N));
    run(N, 20, 0, cyc, '0, 0);
    model.run(N, 20, beta_initial, beta_anneal_rate);
    e1 = int'(model.energy(N));
    chk(cyc == 2 + (N / K + 1) * 20, $sformatf("run 1 cycles %0d", cyc));
    chk(m_final === model_state(), "run 1 final state");
    $display("run 1: energy %0d -> %0d in %0d clocks", e0, e1, cyc);
    chk(e1 < e0, "run 1 lowers the energy");
    res1 = m_final;

    // run 2: partial last group, m_final held
    run(30, 15, 0, cyc, res1, 1);
    model.run(30, 15, beta_initial, beta_anneal_rate);
    chk(cyc == 2 + ((30 + K - 1) / K + 1) * 15, $sformatf("run 2 cycles %0d", cyc));
    chk(m_final === model_state(), "run 2 final state");
    chk(m_final[N-1:30] === res1[N-1:30], "run 2 leaves p-bits beyond N_m alone");

    // run 3: debug
    run(N, 5, 1, cyc, '0, 0);
    model.run(N, 5, beta_initial, beta_anneal_rate);
    chk(m_final === model_state(), "run 3 final state");

    // run 4: N_s = 0
    res1 = m_final;
    run(N, 0, 0, cyc, '0, 0);
    if (cyc == 2 && m_final === res1) n_empty++;
    chk(n_empty == 1, "empty run finishes at once");

    $display("mechanisms: config writes %0d, speculative selects %0d, masked lanes %0d, beta steps %0d, debug live %0d, empty runs %0d, held-start no-restart %0d, masked-column updates %0d",
             n_cfg_writes, model.spec_used, model.masked_lanes, n_beta_steps, n_debug_live, n_empty, n_norestart,
             n_col_masked);
    chk(model.spec_used > 0, "speculation used");
    chk(model.masked_lanes > 0, "masked lanes used");
    chk(n_beta_steps == 20 + 15 + 5, "beta anneal steps");
    chk(n_debug_live > 0, "debug live output");
    chk(n_col_masked > 0, "columns beyond N_m masked");
    chk(n_norestart == 4, "held start does not restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
