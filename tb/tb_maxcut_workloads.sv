// tb_maxcut_workloads: max-cut runs on the accelerator at its default size
// (2048 p-bits, 4-way update) for graph families other than the toroidal
// grid of tb_pc_cop_full. The graphs are generated here, with the same sizes
// and kinds as the G-set benchmarks they stand for.
//
//   * random 800-node graph, 6 % edge density, all weights +1 (like G1-G10,
//     19 176 edges); N_m = 800, N_s = 100
//   * planar 800-node graph: a 20 x 40 grid (not wrapped) with one
//     diagonal of random direction in every cell, unit weights (a planar
//     stand-in for G14-G21); N_m = 800, N_s = 100
//   * fully connected 2000-node graph with random +-1 weights (like K2000);
//     N_m = 2000, N_s = 100
//
// All use beta_initial = 0.01 and anneal rate 1.05, the schedule given for
// 100 samples. Every workload is a full configuration (all 2^18 words of J,
// a new initial state and new seeds) followed by one run. For each one the
// testbench checks the clock count 2 + (N_m/4 + 1) * N_s from instruction
// to done, that the final state equals the sequential reference model bit
// for bit, that p-bits beyond N_m keep their initial values, and a quality
// bound on the cut:
//   * random graph: the cut holds at least 56 % of the edges. A random
//     split cuts 50 %; the best known cuts of G1-G10 hold about 60 %.
//   * planar graph: the cut holds at least 60 % of the edges. Every cell
//     is two triangles, and a triangle can have at most two of its three
//     edges cut. Inner edges lie in two triangles and the 116 border edges
//     in one, so no cut exceeds (2 * 1482 + 116) / 2 = 1540 of the 2281
//     edges (67.5 %); a random split cuts 50 %.
//   * K2000-like graph: energy at most -45 000. For a +-1 fully connected
//     graph the ground state lies near -0.763 N^1.5 (about -68 000 at
//     N = 2000); a random state is near 0.
// The bounds are taken from general knowledge of these graph kinds, not
// from the published accuracy figures.
module tb_maxcut_workloads;
  import pccop_pkg::*;
  import pccop_ref_pkg::*;
  localparam int N = 2048, K = 4, WPR = 2 * N / 32, NS = 100;

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
    #40000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // cut weight of state s, with w = -J
  function automatic longint cut_value(input logic [N-1:0] s, input int nm);
    longint cut = 0;
    for (int a = 0; a < nm; a++)
      for (int b = a + 1; b < nm; b++)
        if (model.j[a][b] != 0 && s[a] != s[b]) cut -= longint'(model.j[a][b]);
    return cut;
  endfunction

  // edge of weight +1 between nodes a and b (J = -1)
  function automatic void add_unit_edge(input int a, input int b, inout longint edges);
    model.j[a][b] = -1; model.j[b][a] = -1; edges++;
  endfunction

  // configure the accelerator with model.j, fresh m_initial and seeds, run
  // it once, and compare with the model; returns the cut found
  task automatic configure_and_run(input string name, input int nm, output longint cut1);
    int cyc;
    longint cut0;
    logic [N-1:0] m_model;
    for (int w = 0; w < 16; w++) seed[w*32 +: 32] = $urandom;
    for (int w = 0; w < N / 32; w++) m_initial[w*32 +: 32] = $urandom;
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
    repeat (2) @(negedge clk);  // let done from an earlier run fall
    model.seed_all(seed);
    for (int c = 0; c < N; c++) model.m[c] = m_initial[c];
    model.spec_used = 0;
    cut0 = cut_value(m_initial, nm);

    instruction = {4'h1, 1'b0, 1'b0, 13'(nm), 13'(NS)};
    cyc = 0;
    repeat (2) begin @(negedge clk); cyc++; end
    while (!done && cyc < 2000000) begin @(negedge clk); cyc++; end
    instruction = '0;

    model.run(nm, NS, longint'(beta_initial), longint'(beta_anneal_rate));
    for (int c = 0; c < N; c++) m_model[c] = model.m[c];
    cut1 = cut_value(m_final, nm);
    $display("%s: cut %0d -> %0d, energy %0d, %0d clocks, %0d speculative selects",
             name, cut0, cut1, model.energy(nm), cyc, model.spec_used);
    chk(cyc == 2 + ((nm + K - 1) / K + 1) * NS, $sformatf("%s: cycles %0d", name, cyc));
    chk(m_final === m_model, {name, ": final state equals the reference model"});
    chk(((m_final ^ m_initial) >> nm) == '0, {name, ": p-bits beyond N_m untouched"});
  endtask

  initial begin
    longint cut, edges;
    model = new(N, K);
    beta_initial     = 24'(longint'(0.01 * 1048576.0));
    beta_anneal_rate = 24'(longint'(1.05 * 1048576.0));
    repeat (3) @(negedge clk); rst = 0;

    // random 800-node graph, unit weights, p = 0.06
    edges = 0;
    for (int a = 0; a < 800; a++)
      for (int b = a + 1; b < 800; b++)
        if ($urandom_range(0, 9999) < 600) begin
          model.j[a][b] = -1; model.j[b][a] = -1; edges++;
        end
    configure_and_run("random 800-node graph", 800, cut);
    $display("  %0d edges, %0d cut (%0d.%01d %%)", edges, cut, 100 * cut / edges,
             (1000 * cut / edges) % 10);
    chk(100 * cut >= 56 * edges, "random graph: cut holds at least 56 % of the edges");

    // planar 800-node graph: triangulated 20 x 40 grid, unit weights
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) model.j[a][b] = 0;
    edges = 0;
    for (int r = 0; r < 20; r++)
      for (int c = 0; c < 40; c++) begin
        automatic int a = r * 40 + c;
        if (c < 39) add_unit_edge(a, a + 1, edges);
        if (r < 19) add_unit_edge(a, a + 40, edges);
        if (r < 19 && c < 39) begin
          // one diagonal of the cell (r, c)..(r+1, c+1)
          if ($urandom_range(0, 1) == 1) add_unit_edge(a, a + 41, edges);
          else                           add_unit_edge(a + 1, a + 40, edges);
        end
      end
    configure_and_run("planar 800-node graph", 800, cut);
    $display("  %0d edges, %0d cut (%0d.%01d %%)", edges, cut, 100 * cut / edges,
             (1000 * cut / edges) % 10);
    chk(100 * cut >= 60 * edges, "planar graph: cut holds at least 60 % of the edges");

    // fully connected 2000-node graph, +-1 weights
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) model.j[a][b] = 0;
    for (int a = 0; a < 2000; a++)
      for (int b = a + 1; b < 2000; b++) begin
        automatic int w = ($urandom_range(0, 1) == 1) ? 1 : -1;
        model.j[a][b] = -w; model.j[b][a] = -w;
      end
    configure_and_run("fully connected 2000-node graph", 2000, cut);
    chk(model.energy(2000) <= -45000, "fully connected graph: energy at most -45000");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
