// tb_anneal_unit: the beta schedule. With beta_initial = 0.01 and rate
// 1.005 (the N_s = 1000 setting) it checks every step of 999 updates
// against a 64-bit truncating model and the end value against
// 0.01 * 1.005^999 computed in floating point (within 1 %). Also: load
// wins over update, update low holds beta, and the product saturates.
module tb_anneal_unit;
  logic clk = 0, rst = 1, load = 0, update = 0;
  logic [23:0] b0, rate, beta;
  int checks = 0, failures = 0;

  anneal_unit dut (.clk(clk), .rst(rst), .load(load), .update(update),
                   .beta_initial(b0), .anneal_rate(rate), .beta(beta));
  always #5 clk = ~clk;

  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input longint e, input string what);
    checks++;
    if (longint'(beta) != e) begin failures++; $display("FAIL %s beta=%0d expected %0d", what, beta, e); end
  endtask

  initial begin
    longint model;
    real fexp;
    @(negedge clk); rst = 0;
    b0   = 24'(longint'(0.01 * 1048576.0));
    rate = 24'(longint'(1.005 * 1048576.0));
    load = 1; update = 1; @(negedge clk); load = 0;
    model = b0; chk(model, "load");
    for (int s = 2; s <= 1000; s++) begin
      @(negedge clk);
      model = (model * rate) >> 20;
      chk(model, "schedule");
    end
    fexp = 0.01 * (1.005 ** 999) * 1048576.0;
    checks++;
    if (real'(beta) < 0.99 * fexp || real'(beta) > 1.01 * fexp) begin
      failures++; $display("FAIL end beta %0d vs %f", beta, fexp);
    end
    update = 0; repeat (3) @(negedge clk);
    chk(model, "hold");
    // saturation: 15.0 * 1.5 exceeds Q4.20
    b0 = 24'(15 << 20); rate = 24'(3 << 19); load = 1; @(negedge clk); load = 0;
    update = 1; @(negedge clk); update = 0;
    chk(24'hFFFFFF, "saturate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
