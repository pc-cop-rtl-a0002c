// tb_pcircuit_fsm: the controller alone. For several (N_m, N_s) it checks
// the cycle count from run start to done, 1 + (ceil(N_m/4) + 1) * N_s,
// the number of fetch, update and beta-update strobes, the group sequence
// and read address, the lane mask of a partial last group, configuration
// mode, that a held start field starts only one run, and that N_s = 0 or
// N_m = 0 finishes without any update.
module tb_pcircuit_fsm;
  import pccop_pkg::*;
  localparam int N = 2048, K = 4;
  logic clk = 0, rst = 1;
  instr_t instr;
  logic [12:0] nm = '0, ns = '0;
  state_t state;
  logic cfg_mode, run_load, fetch, update, beta_update, done;
  logic [8:0] group, rd_addr;
  logic [3:0] lane_mask;
  int checks = 0, failures = 0;

  pcircuit_fsm #(.N(N), .K(K)) dut (.clk(clk), .rst(rst), .instr(instr), .nm(nm), .ns(ns),
    .state(state), .cfg_mode(cfg_mode), .run_load(run_load), .fetch(fetch), .update(update),
    .beta_update(beta_update), .group(group), .rd_addr(rd_addr), .lane_mask(lane_mask), .done(done));
  always #5 clk = ~clk;

  // ctrl_regs stand-in: capture on run_load, clamp to N
  always_ff @(posedge clk) if (run_load) begin
    nm <= (instr.nm > 13'(N)) ? 13'(N) : instr.nm;
    ns <= instr.ns;
  end

  initial begin
    #20000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input int n_m, input int n_s);
    int cyc = 0, nf = 0, nu = 0, nb = 0, exp_g = 0, groups, bad_seq = 0, bad_mask = 0;
    instr = '0; instr.start = 4'h1; instr.nm = 13'(n_m); instr.ns = 13'(n_s);
    if (n_m > N) n_m = N;
    groups = (n_m + K - 1) / K;
    #1;
    chk(run_load, "run_load on start");
    @(negedge clk);
    cyc = 1;
    while (!done) begin
      if (fetch) begin
        nf++; exp_g = 0;
        if (rd_addr != 0) bad_seq++;
      end
      if (update) begin
        nu++;
        if (group != 9'(exp_g) || rd_addr != 9'(exp_g + 1)) bad_seq++;
        for (int r = 0; r < K; r++) if (lane_mask[r] != (exp_g * K + r < n_m)) bad_mask++;
        exp_g++;
      end
      if (beta_update) begin
        nb++;
        if (exp_g != groups) bad_seq++;
      end
      @(negedge clk);
      cyc++;
      if (cyc > 10000000) break;
    end
    chk(cyc == 1 + (n_s == 0 || n_m == 0 ? 0 : (groups + 1) * n_s), $sformatf("cycles %0d for Nm=%0d Ns=%0d", cyc, n_m, n_s));
    if (n_m > 0 && n_s > 0) begin
      chk(nf == n_s && nu == groups * n_s && nb == n_s, $sformatf("strobes f%0d u%0d b%0d", nf, nu, nb));
    end else chk(nf == 0 && nu == 0, "no work for zero size");
    chk(bad_seq == 0, "group sequence");
    chk(bad_mask == 0, "lane mask");
    // holding start must not restart
    repeat (5) @(negedge clk);
    chk(done && !fetch && !update, "no restart while start held");
    instr.start = 0; @(negedge clk);
  endtask

  initial begin
    instr = '0;
    repeat (2) @(negedge clk); rst = 0;
    @(negedge clk);
    chk(state == ST_IDLE && !done && !cfg_mode, "idle after reset");
    instr.cfg = 1; @(negedge clk);
    chk(cfg_mode, "config mode");
    instr.start = 4'h3; @(negedge clk);
    chk(cfg_mode && !run_load, "start ignored in config");
    instr = '0; @(negedge clk);
    chk(state == ST_IDLE, "back to idle");
    run(10, 4);
    run(800, 2);
    run(2048, 3);
    run(1, 1);
    run(7, 0);
    run(0, 5);
    run(5000, 1);   // clamped to 2048
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
