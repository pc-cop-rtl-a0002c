// tb_comparator: the sign decision m = (act > rnd) with act signed Q2.20
// and rnd a signed Q1.20 LFSR value: boundary cases (act = +-1, equal
// values) and random pairs against integer comparison.
module tb_comparator;
  logic signed [21:0] act;
  logic [20:0]        rnd;
  logic               m_new;
  int checks = 0, failures = 0;

  comparator dut (.act(act), .rnd(rnd), .m_new(m_new));

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_one(input int a, input int r);
    bit e;
    act = 22'(a); rnd = 21'(r);
    #1;
    e = a > r;
    checks++;
    if (m_new !== e) begin failures++; $display("FAIL act=%0d rnd=%0d m=%b", a, r, m_new); end
  endtask

  initial begin
    check_one(1 << 20, (1 << 20) - 1);     // +1 beats the largest random value
    check_one(-(1 << 20), -(1 << 20));     // -1 never wins
    check_one(0, 0);
    check_one(0, -1);
    check_one(-1, 0);
    check_one(5, 5);
    for (int t = 0; t < 2000; t++)
      check_one(int'($urandom_range(0, 2 << 20)) - (1 << 20), int'($urandom_range(0, (2 << 20) - 1)) - (1 << 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
