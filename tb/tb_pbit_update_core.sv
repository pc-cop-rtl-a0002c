// tb_pbit_update_core: the speculate-and-select core against a plain
// sequential Gibbs update (pccop_ref_pkg). With N = 64 and K = 4 (and a
// K = 2 copy) it drives random J rows with a zero diagonal, random states,
// groups and betas, and checks that the K new p-bits equal K successive
// sequential updates, each of which reads the new values of the p-bits
// updated before it. The LFSRs step after every check. It counts how
// often a non-trivial speculation (a lane whose earlier p-bits were not
// all -1) was the one selected, and fails if that never happened.
module tb_pbit_update_core;
  import pccop_ref_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst = 1, lfsr_load = 0, step = 0;
  logic [511:0] seed;
  logic [N-1:0] m;
  logic [23:0]  beta;
  logic [4*2*N-1:0] j_rows4;
  logic [2*2*N-1:0] j_rows2;
  logic [3:0] grp4;
  logic [4:0] grp2;
  logic [3:0] new4;
  logic [1:0] new2;
  int checks = 0, failures = 0;

  pbit_update_core #(.N(N), .K(4)) dut4 (.clk(clk), .rst(rst), .lfsr_load(lfsr_load), .seed(seed),
    .step(step), .j_rows(j_rows4), .m(m), .group(grp4), .beta(beta), .m_new(new4));
  pbit_update_core #(.N(N), .K(2)) dut2 (.clk(clk), .rst(rst), .lfsr_load(lfsr_load), .seed(seed),
    .step(step), .j_rows(j_rows2), .m(m), .group(grp2), .beta(beta), .m_new(new2));
  always #5 clk = ~clk;

  pcop_model mod4, mod2;

  initial begin
    #10000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mod4 = new(N, 4);
    mod2 = new(N, 2);
    for (int w = 0; w < 16; w++) seed[w*32 +: 32] = $urandom;
    seed[21 +: 21] = '0;  // one zero seed slice
    lfsr_load = 1; @(negedge clk); rst = 0; @(negedge clk); lfsr_load = 0;
    mod4.seed_all(seed); mod2.seed_all(seed);
    for (int t = 0; t < 600; t++) begin
      int base4, base2, got4, got2;
      // random symmetric J with zero diagonal
      for (int a = 0; a < N; a++) begin
        mod4.j[a][a] = 0;
        for (int b = a + 1; b < N; b++) begin
          automatic int v = (t % 2) ? int'($urandom_range(0, 2)) - 1 : ($urandom_range(0, 3) == 0 ? -1 : 0);
          mod4.j[a][b] = v; mod4.j[b][a] = v;
        end
      end
      foreach (mod4.j[a]) foreach (mod4.j[a][b]) mod2.j[a][b] = mod4.j[a][b];
      for (int c = 0; c < N; c++) m[c] = $urandom_range(0, 1);
      // beta between 0 and 4, with small and large values both common
      beta = (t % 3 == 0) ? 24'($urandom_range(0, 24'h3FFFFF)) : 24'($urandom_range(0, 24'h03FFFF));
      grp4 = 4'($urandom_range(0, N / 4 - 1));
      grp2 = 5'($urandom_range(0, N / 2 - 1));
      base4 = int'(grp4) * 4; base2 = int'(grp2) * 2;
      for (int r = 0; r < 4; r++) for (int c = 0; c < N; c++) j_rows4[r*2*N + 2*c +: 2] = jcode(mod4.j[base4 + r][c]);
      for (int r = 0; r < 2; r++) for (int c = 0; c < N; c++) j_rows2[r*2*N + 2*c +: 2] = jcode(mod2.j[base2 + r][c]);
      for (int c = 0; c < N; c++) begin mod4.m[c] = m[c]; mod2.m[c] = m[c]; end
      mod4.beta = beta; mod2.beta = beta;
      #1;
      got4 = mod4.update_group(base4, N);
      got2 = mod2.update_group(base2, N);
      checks += 2;
      if (int'(new4) != got4) begin failures++; $display("FAIL K=4 t=%0d got %b expected %b", t, new4, 4'(got4)); end
      if (int'(new2) != got2) begin failures++; $display("FAIL K=2 t=%0d got %b expected %b", t, new2, 2'(got2)); end
      step = 1; @(negedge clk); step = 0;
    end
    $display("speculation paths other than all -1 selected: %0d (K=4), %0d (K=2)", mod4.spec_used, mod2.spec_used);
    checks++;
    if (mod4.spec_used == 0 || mod2.spec_used == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
