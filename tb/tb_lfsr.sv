// tb_lfsr: seeds the 21-bit LFSR, steps it and compares every state with
// an independently computed Fibonacci sequence (feedback = b20^b19^b18^b15
// into bit 0). Also checks that a zero seed becomes 1, that the register
// holds when step is low, that load wins over step, and that the sequence
// has the maximal period 2^21 - 1. The mean of 4096 outputs, read as
// signed Q1.20, must be near 0.
module tb_lfsr;
  logic clk = 0, rst = 1, load = 0, step = 0;
  logic [20:0] seed, q, model;
  int checks = 0, failures = 0;
  longint cycles = 0;

  lfsr dut (.clk(clk), .rst(rst), .load(load), .seed(seed), .step(step), .q(q));
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    #50000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [20:0] nxt(input logic [20:0] s);
    logic fb = s[20] ^ s[19] ^ s[18] ^ s[15];
    return (s << 1) | 21'(fb);
  endfunction

  task automatic chk(input logic [20:0] exp_q, input string what);
    checks++;
    if (q !== exp_q) begin failures++; $display("FAIL %s q=%h expected %h", what, q, exp_q); end
  endtask

  initial begin
    longint period;
    longint acc;
    @(negedge clk); rst = 0;
    chk(21'd1, "reset value");
    // zero seed
    seed = '0; load = 1; @(negedge clk); load = 0;
    chk(21'd1, "zero seed");
    // hold without step
    repeat (3) @(negedge clk);
    chk(21'd1, "hold");
    // load beats step
    seed = 21'h0ABCDE; load = 1; step = 1; @(negedge clk); load = 0;
    chk(21'h0ABCDE, "load over step");
    model = 21'h0ABCDE;
    acc = 0;
    for (int t = 0; t < 4096; t++) begin
      @(negedge clk);
      model = nxt(model);
      chk(model, "sequence");
      acc += longint'(signed'(q));
    end
    checks++;
    // mean within 1/16 of full scale
    if (acc / 4096 > 65536 || acc / 4096 < -65536) begin
      failures++; $display("FAIL mean %0d", acc / 4096);
    end
    // period
    period = 4096;
    while (q != 21'h0ABCDE && period < 64'd3000000) begin @(negedge clk); period++; end
    checks++;
    if (period != (64'd1 << 21) - 1) begin failures++; $display("FAIL period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
