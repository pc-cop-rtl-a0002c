// adder_tree: sum of J_ij * m_j over one full row of J.
//
// N jm_mult cells form the 2-bit signed products, which a balanced binary
// tree of log2(N) adder levels reduces to one signed sum (depth 11 for
// N = 2048). Level l holds N/2^l partial sums of l+2 bits, so each adder
// is only as wide as its operands need; the output has log2(N)+2 bits and
// covers [-N, +N]. Combinational, no pipeline registers: the whole row is
// summed in the cycle in which it is read. N must be a power of two.
// The logarithmic tree and its jm_mult leaves follow the published design;
// the per-level widths are this design's choice.
module adder_tree #(
  parameter int unsigned N     = 2048,
  parameter int unsigned LOG_N = $clog2(N),
  parameter int unsigned SUM_W = LOG_N + 2
) (
  input  logic [2*N-1:0]           j_row,  // J_i1 in bits [1:0]
  input  logic [N-1:0]             m,      // m_1 in bit 0
  output logic signed [SUM_W-1:0]  sum
);
  initial assert (N == (1 << LOG_N)) else $error("adder_tree: N must be a power of two");

  for (genvar l = 0; l <= LOG_N; l++) begin : lv
    localparam int unsigned CNT = N >> l;
    logic signed [l+1:0] s [CNT];
    if (l == 0) begin : g_leaf
      for (genvar k = 0; k < N; k++) begin : g_mul
        logic [1:0] p;
        jm_mult u_mul (.j(j_row[2*k +: 2]), .m(m[k]), .p(p));
        assign s[k] = signed'(p);
      end
    end else begin : g_add
      for (genvar k = 0; k < CNT; k++) begin : g_node
        assign s[k] = lv[l-1].s[2*k] + lv[l-1].s[2*k+1];
      end
    end
  end

  assign sum = lv[LOG_N].s[0];
endmodule
