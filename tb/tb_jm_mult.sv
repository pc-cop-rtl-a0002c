// tb_jm_mult: exhaustive check of the J x m product cell against the
// truth table (J 00/01/11 = 0/+1/-1, m 0/1 = -1/+1, product in J code),
// plus the unused J code 10, which must act as zero.
module tb_jm_mult;
  logic [1:0] j, p;
  logic       m;
  int checks = 0, failures = 0;

  jm_mult dut (.j(j), .m(m), .p(p));

  // expected products, indexed {j, m}; written out from the table
  logic [1:0] expected [8] = '{2'b00, 2'b00,   // j=00: m=0, m=1
                               2'b00, 2'b00,   // j=10 (unused): zero
                               2'b11, 2'b01,   // j=01 (+1): -1, +1
                               2'b01, 2'b11};  // j=11 (-1): +1, -1
  initial begin
    #1000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [2:0] idx;
    for (int v = 0; v < 8; v++) begin
      {j, m} = 3'(v);
      #1;
      case (j) 2'b00: idx = {2'd0, m}; 2'b10: idx = {2'd1, m}; 2'b01: idx = {2'd2, m}; default: idx = {2'd3, m}; endcase
      checks++;
      if (p !== expected[idx]) begin
        failures++; $display("FAIL j=%b m=%b p=%b expected %b", j, m, p, expected[idx]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
