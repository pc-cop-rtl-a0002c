// tb_ctrl_regs: beta inputs are captured only under cfg_load, N_m, N_s and
// debug only under run_load, and N_m above N is clamped to N. The column
// mask must hold exactly N_m ones from bit 0 up.
module tb_ctrl_regs;
  import pccop_pkg::*;
  logic clk = 0, rst = 1, cfg_load = 0, run_load = 0;
  logic [23:0] bi_in, ar_in, bi, ar;
  logic [12:0] nm, ns;
  logic debug;
  logic [2047:0] col_en;
  instr_t instr;
  int checks = 0, failures = 0;

  ctrl_regs #(.N(2048)) dut (.clk(clk), .rst(rst), .cfg_load(cfg_load), .beta_initial_in(bi_in),
    .anneal_rate_in(ar_in), .run_load(run_load), .instr(instr), .beta_initial(bi),
    .anneal_rate(ar), .nm(nm), .ns(ns), .debug(debug), .col_en(col_en));
  always #5 clk = ~clk;

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    instr = '0; bi_in = 24'h123456; ar_in = 24'h10147A;
    @(negedge clk); rst = 0;
    chk(bi == 0 && ar == 0 && nm == 0 && ns == 0 && !debug && col_en == '0, "reset");
    @(negedge clk);
    chk(bi == 0, "no capture without cfg_load");
    cfg_load = 1; @(negedge clk); cfg_load = 0;
    chk(bi == 24'h123456 && ar == 24'h10147A, "cfg capture");
    bi_in = 0; ar_in = 0; @(negedge clk);
    chk(bi == 24'h123456, "cfg hold");
    instr.nm = 13'd800; instr.ns = 13'd1000; instr.debug = 1;
    @(negedge clk);
    chk(nm == 0, "no capture without run_load");
    run_load = 1; @(negedge clk); run_load = 0;
    chk(nm == 800 && ns == 1000 && debug, "run capture");
    chk(col_en == {{1248{1'b0}}, {800{1'b1}}}, "column mask for N_m = 800");
    instr.nm = 13'd5000; run_load = 1; @(negedge clk); run_load = 0;
    chk(nm == 2048, "clamp");
    chk(col_en == '1, "column mask clamped to N");
    instr.nm = 13'd2048; run_load = 1; @(negedge clk); run_load = 0;
    chk(nm == 2048, "exact N");
    instr.nm = 13'd1; run_load = 1; @(negedge clk); run_load = 0;
    chk(nm == 1 && col_en == 2048'd1, "column mask for N_m = 1");
    instr.nm = 13'd0; run_load = 1; @(negedge clk); run_load = 0;
    chk(nm == 0 && col_en == '0, "column mask for N_m = 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
