// m_reg: the N-bit p-bit state register (0 = -1, 1 = +1).
//
// load copies m_init in (the initial random state). upd_en writes the K
// updated p-bits of group upd_group, that is bits upd_group*K .. +K-1;
// lanes whose upd_mask bit is 0 (beyond N_m) keep their value. Load wins
// over update. Synchronous, active-high reset to all zeros. The 2048-bit
// register and its 0/1 encoding follow the published design; the masked
// group write is this design's choice.
module m_reg #(
  parameter int unsigned N     = 2048,
  parameter int unsigned K     = 4,
  parameter int unsigned GRP_W = (N / K > 1) ? $clog2(N / K) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             load,
  input  logic [N-1:0]     m_init,
  input  logic             upd_en,
  input  logic [GRP_W-1:0] upd_group,
  input  logic [K-1:0]     upd_bits,
  input  logic [K-1:0]     upd_mask,
  output logic [N-1:0]     m
);
  always_ff @(posedge clk) begin
    if (rst) m <= '0;
    else if (load) m <= m_init;
    else if (upd_en) begin
      for (int r = 0; r < K; r++)
        if (upd_mask[r]) m[upd_group*K + r] <= upd_bits[r];
    end
  end
endmodule
