// j_addr_decoder: decodes the 18-bit J write address.
//
// The address names one 32-bit word of J: bits [17:7] are the J row
// (0..N-1) and bits [6:0] the word within the 4096-bit row. Row r lives in
// bank r mod K at bank row r / K, so that K consecutive rows sit in K
// different banks and can be read together. The decoder returns the bank
// row, the word index and a one-hot bank write enable gated by we.
// Combinational. bank_row and word are plain bit fields of the address,
// so only bank_we holds logic. The 18-bit width is the published one; the
// row/word split and the row-to-bank interleave are this design's choice.
module j_addr_decoder
  import pccop_pkg::*;
#(
  parameter int unsigned N      = 2048,
  parameter int unsigned K      = 4,
  parameter int unsigned WORDS  = 2 * N / JDATA_W,     // 32-bit words per row
  parameter int unsigned WORD_W = $clog2(WORDS),
  parameter int unsigned ROW_W  = $clog2(N),
  parameter int unsigned KW     = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned BROW_W = (N / K > 1) ? $clog2(N / K) : 1
) (
  input  logic [JADDR_W-1:0] addr,
  input  logic               we,
  output logic [K-1:0]       bank_we,
  output logic [BROW_W-1:0]  bank_row,
  output logic [WORD_W-1:0]  word
);
  logic [ROW_W-1:0] row;
  logic [KW-1:0]    bank;

  assign word = addr[WORD_W-1:0];
  assign row  = addr[WORD_W +: ROW_W];

  if (K > 1) begin : g_banked
    assign bank     = row[KW-1:0];
    assign bank_row = BROW_W'(row >> KW);
  end else begin : g_single
    assign bank     = '0;
    assign bank_row = BROW_W'(row);
  end

  always_comb begin
    bank_we = '0;
    if (we) bank_we[bank] = 1'b1;
  end

  initial assert (WORD_W + ROW_W <= JADDR_W) else $error("j_addr_decoder: J_addr too narrow");
endmodule
