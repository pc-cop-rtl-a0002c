// tb_beta_multiplier: random Q4.20 betas times random signed sums in
// [-2048, 2048], including the extremes, against a 64-bit product.
module tb_beta_multiplier;
  localparam int SUM_W = 14;
  logic [23:0]              beta;
  logic signed [SUM_W-1:0]  sum;
  logic signed [SUM_W+24:0] i_out;
  int checks = 0, failures = 0;

  beta_multiplier #(.SUM_W(SUM_W)) dut (.beta(beta), .sum(sum), .i_out(i_out));

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_one(input longint b, input longint s);
    beta = 24'(b); sum = SUM_W'(s);
    #1;
    checks++;
    if (longint'(i_out) != b * s) begin
      failures++; $display("FAIL beta=%0d sum=%0d got %0d expected %0d", b, s, i_out, b * s);
    end
  endtask

  initial begin
    check_one(24'hFFFFFF, 2048);
    check_one(24'hFFFFFF, -2048);
    check_one(0, -2048);
    check_one(10486, -1);      // 0.01 in Q4.20
    for (int t = 0; t < 500; t++)
      check_one($urandom_range(0, 24'hFFFFFF), $signed($urandom_range(0, 4096)) - 2048);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
