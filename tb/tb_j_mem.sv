// tb_j_mem: writes a whole J matrix (N = 64, K = 4 here, so 64 rows of
// four 32-bit words) through the 32-bit port, then reads every group and
// checks that bank b returns row gK+b one clock after rd_addr = g. A
// rewrite of one word must change only that word.
module tb_j_mem;
  localparam int N = 64, K = 4, ROWB = 2 * N, WPR = ROWB / 32;
  logic clk = 0, wr_en = 0;
  logic [17:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic [3:0]  rd_addr = '0;
  logic [K*ROWB-1:0] rd_rows;
  logic [ROWB-1:0] model [N];
  int checks = 0, failures = 0;

  j_mem #(.N(N), .K(K)) dut (.clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
                             .rd_addr(rd_addr), .rd_rows(rd_rows));
  always #5 clk = ~clk;

  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic write_word(input int row, input int w, input logic [31:0] d);
    // address layout for this size: row above the word index
    wr_addr = 18'((row << $clog2(WPR)) | w); wr_data = d; wr_en = 1;
    @(negedge clk); wr_en = 0;
    model[row][w*32 +: 32] = d;
  endtask

  task automatic read_all();
    for (int g = 0; g < N / K; g++) begin
      rd_addr = 4'(g);
      @(negedge clk);
      for (int b = 0; b < K; b++) begin
        checks++;
        if (rd_rows[b*ROWB +: ROWB] !== model[g*K + b]) begin
          failures++; $display("FAIL group %0d bank %0d", g, b);
        end
      end
    end
  endtask

  initial begin
    @(negedge clk);
    for (int r = 0; r < N; r++)
      for (int w = 0; w < WPR; w++) write_word(r, w, $urandom);
    read_all();
    write_word(37, 2, 32'hDEADBEEF);
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
