// tb_instr_reg: random 32-bit instructions must appear one clock later
// with start = [31:28], config = [27], debug = [26], Nm = [25:13] and
// Ns = [12:0]; reset clears the register.
module tb_instr_reg;
  import pccop_pkg::*;
  logic clk = 0, rst = 1;
  logic [31:0] instruction = '0;
  instr_t instr;
  int checks = 0, failures = 0;

  instr_reg dut (.clk(clk), .rst(rst), .instruction(instruction), .instr(instr));
  always #5 clk = ~clk;

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    instruction = '1;
    @(negedge clk);
    checks++; if (instr !== '0) begin failures++; $display("FAIL reset"); end
    rst = 0;
    for (int t = 0; t < 500; t++) begin
      automatic logic [31:0] v = $urandom;
      instruction = v;
      @(negedge clk);
      checks++;
      if (instr.start !== v[31:28] || instr.cfg !== v[27] || instr.debug !== v[26] ||
          instr.nm !== v[25:13] || instr.ns !== v[12:0]) begin
        failures++; $display("FAIL %h", v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
