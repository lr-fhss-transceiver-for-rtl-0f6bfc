// conv_encoder_tb: random bit strings at every code rate, encoder started
// from state zero; the serial coded stream is compared bit by bit with a
// reference model (generators 133/171/165 octal, punct_mask kept bits in
// order c0, c1, c2), and its length with coded_len().
module conv_encoder_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, in_bit = 0, in_ready, code_valid, code_bit;
  code_rate_e cr = CR_1_3;
  logic [5:0] init_state = '0;
  int checks = 0, failures = 0;
  bit exp_q [$];
  int ncode;
  always #5 clk = ~clk;
  conv_encoder dut (.*);
  always @(posedge clk) if (rst_n && code_valid) begin
    checks++; ncode++;
    if (exp_q.size() == 0 || code_bit !== exp_q.pop_front()) failures++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      logic [6:0] w;
      logic [5:0] s;
      int nb;
      cr = code_rate_e'(r % 4); nb = 20 + $urandom % 40; s = '0; ncode = 0;
      start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < nb; k++) begin
        logic [2:0] m;
        logic u;
        u = 1'($urandom);
        w = {u, s};
        m = punct_mask(cr, k);
        if (m[0]) exp_q.push_back(^(w & CONV_G0));
        if (m[1]) exp_q.push_back(^(w & CONV_G1));
        if (m[2]) exp_q.push_back(^(w & CONV_G2));
        s = {u, s[5:1]};
        in_valid = 1; in_bit = u;
        do @(posedge clk); while (!in_ready);
        @(negedge clk); in_valid = 0;
      end
      repeat (6) @(negedge clk);
      checks++; if (ncode != coded_len(cr, nb) || exp_q.size() != 0) begin failures++; $display("len %0d exp %0d", ncode, coded_len(cr, nb)); end
      exp_q.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
