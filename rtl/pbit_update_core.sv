// pbit_update_core: K-way pseudo-parallel p-bit update with
// speculate-and-select.
//
// Each clock it updates p-bits i .. i+K-1 (i = group*K) exactly as K
// successive sequential Gibbs updates would, from J rows i .. i+K-1 and
// the current state m.
//
// Lane r (p-bit i+r) depends on the new values of the r p-bits before it,
// which are not known yet. The lane therefore has one adder tree, giving
// T_r = sum_j J[i+r][j] m_j with the old values, and 2^r speculative
// paths, one per guess c of those r new values (bit q of c is the guess
// for p-bit i+q, 1 = +1):
//   base_r = T_r - sum_{q<r} J[i+r][i+q] (m_{i+q} + 1)   (all guesses -1)
//   S_r(c) = base_r + sum_{q<r, c_q = 1} 2 J[i+r][i+q]
// Each path scales its sum by beta, applies the activation and compares
// with its own LFSR (pbit_path). Lane 0 has a single path. The selects
// then resolve in order: lane 0's result picks lane 1's path, lanes 0-1
// pick lane 2's, and so on, like a carry-select adder. K adder trees and
// 2^K - 1 paths in all (4 and 15 for K = 4).
//
// Path n = 2^r - 1 + c takes LFSR seed bits [21n+20 : 21n]; seeds load on
// lfsr_load and all LFSRs step on step. m_new is combinational from
// j_rows, m, group and beta. The speculate-and-select scheme, the 2J
// adjustment of one tree output per lane, and the tree and path counts
// follow the published design. The path numbering, the seed slices and
// the all -1 base sum are this design's choices.
module pbit_update_core
  import pccop_pkg::*;
#(
  parameter int unsigned N     = 2048,
  parameter int unsigned K     = 4,
  parameter int unsigned GRP_W = (N / K > 1) ? $clog2(N / K) : 1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                lfsr_load,
  input  logic [SEED_W-1:0]   seed,
  input  logic                step,
  input  logic [K*2*N-1:0]    j_rows,   // row i+r in bits [r*2N +: 2N]
  input  logic [N-1:0]        m,
  input  logic [GRP_W-1:0]    group,
  input  logic [BETA_W-1:0]   beta,
  output logic [K-1:0]        m_new
);
  localparam int unsigned TREE_W = $clog2(N) + 2;
  localparam int unsigned SUM_W  = TREE_W + 1;
  localparam int unsigned IDX_W  = $clog2(N);

  initial assert (((1 << K) - 1) * LFSR_W <= SEED_W) else $error("pbit_update_core: not enough seed bits");

  logic [IDX_W-1:0] base_idx;
  assign base_idx = IDX_W'(group) * IDX_W'(K);

  for (genvar r = 0; r < K; r++) begin : g_lane
    localparam int unsigned NSPEC = 1 << r;

    logic signed [TREE_W-1:0] tree_sum;
    logic signed [SUM_W-1:0]  base_sum;
    logic [NSPEC-1:0]         spec;
    logic                     res;      // this lane's resolved new p-bit

    adder_tree #(.N(N)) u_tree (
      .j_row(j_rows[r*2*N +: 2*N]), .m(m), .sum(tree_sum));

    if (r == 0) begin : g_first
      assign base_sum = SUM_W'(tree_sum);
    end else begin : g_adj
      // J[i+r][i+q] as +-1/0 and the old state of p-bit i+q, for q < r
      logic signed [2:0] jq    [r];
      logic              m_old [r];
      for (genvar q = 0; q < r; q++) begin : g_q
        logic [1:0] jcode;
        assign jcode    = j_rows[r*2*N + 2*(int'(base_idx) + q) +: 2];
        assign jq[q]    = (jcode == 2'b01) ? 3'sd1 : (jcode == 2'b11) ? -3'sd1 : 3'sd0;
        assign m_old[q] = m[int'(base_idx) + q];
      end
      always_comb begin
        base_sum = SUM_W'(tree_sum);
        for (int q = 0; q < r; q++)
          if (m_old[q]) base_sum = base_sum - SUM_W'(2 * jq[q]);
      end
    end

    for (genvar c = 0; c < NSPEC; c++) begin : g_spec
      localparam int unsigned PATH = NSPEC - 1 + c;
      logic signed [SUM_W-1:0] spec_sum;
      if (r == 0) begin : g_nospec
        assign spec_sum = base_sum;
      end else begin : g_adjust
        always_comb begin
          spec_sum = base_sum;
          for (int q = 0; q < r; q++)
            if (c[q]) spec_sum = spec_sum + SUM_W'(2 * g_adj.jq[q]);
        end
      end
      pbit_path #(.SUM_W(SUM_W)) u_path (
        .clk(clk), .rst(rst), .lfsr_load(lfsr_load),
        .lfsr_seed(seed[PATH*LFSR_W +: LFSR_W]), .step(step),
        .beta(beta), .sum(spec_sum), .m_new(spec[c]));
    end

    // select: the already resolved new values of lanes 0..r-1 pick the path
    if (r == 0) begin : g_sel0
      assign res = spec[0];
    end else begin : g_sel
      logic [r-1:0] prev;
      for (genvar q = 0; q < r; q++) begin : g_prev
        assign prev[q] = g_lane[q].res;
      end
      assign res = spec[prev];
    end
    assign m_new[r] = res;
  end
endmodule
