// tb_pc_cop_full: one complete max-cut run on the accelerator at its
// default size (2048 p-bits, 4-way update, 8 Mb J memory).
//
// The problem is an 800-node toroidal grid (20 x 40, 1600 edges, random
// +-1 edge weights), the same shape as the G11-G13 benchmarks, generated
// here rather than read from a file. J = -w. All 2^18 words of J are
// written (unused entries zero). The run uses N_m = 800, N_s = 100,
// beta_initial = 0.01 and anneal rate 1.05. Checks: the final state equals
// the sequential reference model bit for bit; the run takes
// 2 + (800/4 + 1) * 100 = 20102 clocks from instruction to done (201 us at
// 100 MHz); p-bits 800..2047 keep their initial values; the cut found is
// larger than the initial state's cut and the final energy is at most
// -900, about 80 % of the ground-state energy expected for such a graph.
module tb_pc_cop_full;
  import pccop_pkg::*;
  import pccop_ref_pkg::*;
  localparam int N = 2048, K = 4, WPR = 2 * N / 32;
  localparam int ROWS = 20, COLS = 40, NM = ROWS * COLS, NS = 100;

  logic clk = 0, rst = 1;
  logic [31:0]  J_data_in = '0;
  logic [17:0]  J_addr = '0;
  logic [N-1:0] m_initial, m_final;
  logic [511:0] seed;
  logic [23:0]  beta_initial, beta_anneal_rate;
  logic [31:0]  instruction = '0;
  logic config_mode, done;
  int checks = 0, failures = 0;

  pc_cop_top dut (
    .clk(clk), .rst(rst), .J_data_in(J_data_in), .J_addr(J_addr), .m_initial(m_initial),
    .seed(seed), .beta_initial(beta_initial), .beta_anneal_rate(beta_anneal_rate),
    .instruction(instruction), .m_final(m_final), .config_mode(config_mode), .done(done));
  always #5 clk = ~clk;

  pcop_model model;

  initial begin
    #20000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int cut_value(input logic [N-1:0] s);
    int cut = 0;
    for (int a = 0; a < NM; a++)
      for (int b = a + 1; b < NM; b++)
        if (model.j[a][b] != 0 && s[a] != s[b]) cut += -model.j[a][b];  // w = -J
    return cut;
  endfunction

  initial begin
    int cyc, cut0, cut1;
    logic [N-1:0] m_model;
    model = new(N, K);
    // toroidal grid: node (r, c) = r * COLS + c, edges to the right and below
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        automatic int a = r * COLS + c;
        automatic int nb[2] = '{r * COLS + (c + 1) % COLS, ((r + 1) % ROWS) * COLS + c};
        foreach (nb[e]) begin
          automatic int w = $urandom_range(0, 1) ? 1 : -1;
          model.j[a][nb[e]] = -w; model.j[nb[e]][a] = -w;
        end
      end
    for (int w = 0; w < 16; w++) seed[w*32 +: 32] = $urandom;
    for (int w = 0; w < N / 32; w++) m_initial[w*32 +: 32] = $urandom;
    beta_initial     = 24'(longint'(0.01 * 1048576.0));
    beta_anneal_rate = 24'(longint'(1.05 * 1048576.0));
    repeat (3) @(negedge clk); rst = 0;

    // configuration
    instruction = {4'h0, 1'b1, 1'b0, 13'd0, 13'd0};
    while (!config_mode) @(negedge clk);
    for (int r = 0; r < N; r++)
      for (int w = 0; w < WPR; w++) begin
        logic [31:0] d;
        for (int e = 0; e < 16; e++) d[2*e +: 2] = jcode(model.j[r][16*w + e]);
        J_addr = 18'((r << 7) | w); J_data_in = d;
        @(negedge clk);
      end
    instruction = '0;
    while (config_mode) @(negedge clk);
    model.seed_all(seed);
    for (int c = 0; c < N; c++) model.m[c] = m_initial[c];
    cut0 = cut_value(m_initial);

    // run
    instruction = {4'h1, 1'b0, 1'b0, 13'(NM), 13'(NS)};
    cyc = 0;
    repeat (2) begin @(negedge clk); cyc++; end
    while (!done && cyc < 1000000) begin @(negedge clk); cyc++; end
    instruction = '0;

    model.run(NM, NS, beta_initial, beta_anneal_rate);
    for (int c = 0; c < N; c++) m_model[c] = model.m[c];
    cut1 = cut_value(m_final);
    $display("800-node toroidal graph: cut %0d -> %0d, energy %0d, %0d clocks, %0d speculative selects",
             cut0, cut1, model.energy(NM), cyc, model.spec_used);
    chk(cyc == 2 + (NM / K + 1) * NS, $sformatf("cycles %0d", cyc));
    chk(m_final === m_model, "final state equals the reference model");
    chk(m_final[N-1:NM] === m_initial[N-1:NM], "p-bits beyond N_m untouched");
    chk(cut1 > cut0, "cut improved");
    // a +-1 toroidal spin glass has a ground-state energy near -1.40 per
    // spin (about -1120 here); require at least 80 % of that
    chk(model.energy(NM) <= -900, "energy near the ground state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
