// tb_m_reg: loads a random initial state and applies random group updates
// with random lane masks, comparing the register with a bit-array model
// after every clock; checks that load wins over update.
module tb_m_reg;
  localparam int N = 2048, K = 4;
  logic clk = 0, rst = 1, load = 0, upd_en = 0;
  logic [N-1:0] m_init, m, model;
  logic [8:0]   upd_group = '0;
  logic [K-1:0] upd_bits = '0, upd_mask = '0;
  int checks = 0, failures = 0;

  m_reg #(.N(N), .K(K)) dut (.clk(clk), .rst(rst), .load(load), .m_init(m_init),
    .upd_en(upd_en), .upd_group(upd_group), .upd_bits(upd_bits), .upd_mask(upd_mask), .m(m));
  always #5 clk = ~clk;

  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input string what);
    checks++;
    if (m !== model) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    @(negedge clk); rst = 0;
    model = '0; chk("reset");
    for (int w = 0; w < N / 32; w++) m_init[w*32 +: 32] = $urandom;
    load = 1; upd_en = 1; @(negedge clk); load = 0;
    model = m_init; chk("load over update");
    for (int t = 0; t < 2000; t++) begin
      upd_group = 9'($urandom_range(0, N / K - 1));
      upd_bits  = 4'($urandom);
      upd_mask  = (t % 4 == 0) ? 4'($urandom) : 4'hF;
      upd_en    = ($urandom_range(0, 7) != 0);
      @(negedge clk);
      if (upd_en) for (int r = 0; r < K; r++) if (upd_mask[r]) model[int'(upd_group) * K + r] = upd_bits[r];
      chk("update");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
