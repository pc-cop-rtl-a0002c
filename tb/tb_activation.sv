// tb_activation: the piecewise-linear activation with T = 1 (A1, the one
// used) and T = 4 (A4), at the clamp edges and on random inputs, against
// the formula -1 / in/T / +1.
module tb_activation;
  import pccop_ref_pkg::*;
  localparam int IN_W = 38;
  logic signed [IN_W-1:0] in_val;
  logic signed [21:0]     out1, out4;
  int checks = 0, failures = 0;
  localparam longint ONE = longint'(1) << 20;

  activation #(.IN_W(IN_W), .T_LOG2(0)) dut1 (.in_val(in_val), .out_val(out1));
  activation #(.IN_W(IN_W), .T_LOG2(2)) dut4 (.in_val(in_val), .out_val(out4));

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_one(input longint v);
    longint e1, e4;
    in_val = IN_W'(v);
    #1;
    // expected values written from the definition, not the reference package
    e1 = (v <= -ONE) ? -ONE : (v >= ONE) ? ONE : v;
    e4 = (v <= -4*ONE) ? -ONE : (v >= 4*ONE) ? ONE : (v >>> 2);
    checks += 2;
    if (longint'(out1) != e1) begin failures++; $display("FAIL A1 in=%0d out=%0d exp=%0d", v, out1, e1); end
    if (longint'(out4) != e4) begin failures++; $display("FAIL A4 in=%0d out=%0d exp=%0d", v, out4, e4); end
    if (act(v) != e1) failures++;  // model agrees with the definition
  endtask

  initial begin
    longint edges[] = '{0, 1, -1, ONE-1, ONE, ONE+1, -ONE+1, -ONE, -ONE-1,
                        4*ONE-1, 4*ONE, -4*ONE+1, -4*ONE, 3*ONE, -3*ONE,
                        longint'(1) << 36, -(longint'(1) << 36)};
    foreach (edges[e]) check_one(edges[e]);
    for (int t = 0; t < 500; t++) begin
      automatic longint v = longint'($urandom_range(0, 32'h00A00000)) - 64'h00500000;
      check_one(v);
      check_one(v * 1000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
