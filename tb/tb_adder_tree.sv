// tb_adder_tree: random and extreme J rows and states at the full width
// of 2048 columns; the tree's sum is compared with a plain loop over
// sum_j J_ij m_j.
module tb_adder_tree;
  import pccop_ref_pkg::*;
  localparam int N = 2048;
  logic [2*N-1:0] j_row;
  logic [N-1:0]   m;
  logic signed [$clog2(N)+1:0] sum;
  int checks = 0, failures = 0;

  adder_tree #(.N(N)) dut (.j_row(j_row), .m(m), .sum(sum));

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_one();
    int exp_sum = 0;
    #1;
    for (int c = 0; c < N; c++) exp_sum += jval(j_row[2*c +: 2]) * (m[c] ? 1 : -1);
    checks++;
    if (int'(sum) != exp_sum) begin
      failures++; $display("FAIL sum=%0d expected %0d", sum, exp_sum);
    end
  endtask

  initial begin
    // all +1 with all +1: +N; all +1 with all -1: -N; all zero: 0
    for (int c = 0; c < N; c++) j_row[2*c +: 2] = 2'b01;
    m = '1; check_one();
    m = '0; check_one();
    j_row = '0; check_one();
    for (int t = 0; t < 60; t++) begin
      for (int c = 0; c < N; c++) begin
        automatic int v = $urandom_range(0, 3);
        j_row[2*c +: 2] = (t % 3 == 0) ? jcode(v == 0 ? 0 : 1) : 2'(v);  // mix of codes incl. 10
        m[c] = $urandom_range(0, 1);
      end
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
