// j_mem: the J matrix store, K banks of N/K rows x 2N bits (8 Mb in all
// for N = 2048).
//
// Write side: one 32-bit word per clock, addressed through j_addr_decoder.
// Read side: every bank returns the whole row at rd_addr, one clock after
// rd_addr is presented (synchronous read, as block RAM does); bank b holds
// J rows b, b+K, b+2K, ..., so rd_addr = g yields rows gK..gK+K-1.
// rd_rows[b*2N +: 2N] is bank b's row, with J_i1 in its lowest two bits.
// The arrays carry no reset. The 8 Mb size, whole-row reads and the split
// into K banks follow the published design; the row interleave and the
// plain-array form (left to synthesis to map onto block RAM) are this
// design's choices.
module j_mem
  import pccop_pkg::*;
#(
  parameter int unsigned N      = 2048,
  parameter int unsigned K      = 4,
  parameter int unsigned ROWB   = 2 * N,
  parameter int unsigned DEPTH  = N / K,
  parameter int unsigned BROW_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned WORD_W = $clog2(ROWB / JDATA_W)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [JADDR_W-1:0]   wr_addr,
  input  logic [JDATA_W-1:0]   wr_data,
  input  logic [BROW_W-1:0]    rd_addr,
  output logic [K*ROWB-1:0]    rd_rows
);
  logic [K-1:0]      bank_we;
  logic [BROW_W-1:0] w_row;
  logic [WORD_W-1:0] w_word;

  j_addr_decoder #(.N(N), .K(K)) u_dec (
    .addr(wr_addr), .we(wr_en), .bank_we(bank_we), .bank_row(w_row), .word(w_word));

  for (genvar b = 0; b < K; b++) begin : g_bank
    logic [ROWB-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (bank_we[b]) mem[w_row][w_word*JDATA_W +: JDATA_W] <= wr_data;
      rd_rows[b*ROWB +: ROWB] <= mem[rd_addr];
    end
  end
endmodule
