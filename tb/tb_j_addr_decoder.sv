// tb_j_addr_decoder: random and corner J addresses; the row (addr[17:7])
// must land in bank row mod 4 at bank row row/4, the word is addr[6:0],
// and no bank is enabled without we.
module tb_j_addr_decoder;
  logic [17:0] addr;
  logic        we;
  logic [3:0]  bank_we;
  logic [8:0]  bank_row;
  logic [6:0]  word;
  int checks = 0, failures = 0;

  j_addr_decoder #(.N(2048), .K(4)) dut (.addr(addr), .we(we), .bank_we(bank_we),
                                         .bank_row(bank_row), .word(word));

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_one(input int a, input bit w);
    int row = a / 128;
    addr = 18'(a); we = w;
    #1;
    checks++;
    if (word != 7'(a % 128) || bank_row != 9'(row / 4) ||
        bank_we != (w ? 4'(1 << (row % 4)) : 4'b0)) begin
      failures++;
      $display("FAIL addr=%0d we=%b: bank_we=%b row=%0d word=%0d", a, w, bank_we, bank_row, word);
    end
  endtask

  initial begin
    check_one(0, 1); check_one(127, 1); check_one(128, 1); check_one(3*128+5, 1);
    check_one(262143, 1); check_one(262143, 0);
    for (int t = 0; t < 1000; t++) check_one($urandom_range(0, 262143), $urandom_range(0, 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
