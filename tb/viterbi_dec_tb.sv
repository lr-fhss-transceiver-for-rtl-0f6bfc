// viterbi_dec_tb: random zero-tailed messages are encoded by a reference
// rate-1/3 encoder, mapped to soft bits of +/-40 with uniform noise of up to
// +/-50 (and, in every second run, the c2 soft bit zeroed as a rate-1/2
// puncture); after the last step flush is pulsed. Every decoded bit must equal
// the message, and exactly nb bits must come out.
module viterbi_dec_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, tail_biting = 0, in_valid = 0, flush = 0, flushing, out_valid, out_bit;
  llr_t llr [3];
  int checks = 0, failures = 0, nout;
  bit msg [$];
  always #5 clk = ~clk;
  viterbi_dec dut (.*);
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (nout >= msg.size() || out_bit !== msg[nout]) failures++;
    nout++;
  end
  function automatic llr_t softb(input logic b);
    int v;
    v = (b ? 40 : -40) + int'($urandom % 101) - 50;
    return llr_t'(v);
  endfunction
  initial begin
    llr = '{default: '0};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      logic [5:0] s;
      int nb;
      nb = 60 + $urandom % 100; s = '0; nout = 0; msg.delete();
      for (int k = 0; k < nb; k++) msg.push_back(k < nb - CONV_TAIL ? 1'($urandom) : 1'b0);
      start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < nb; k++) begin
        logic [6:0] w;
        w = {msg[k], s};
        llr[0] = softb(^(w & CONV_G0)); llr[1] = softb(^(w & CONV_G1));
        llr[2] = r[0] ? llr_t'(0) : softb(^(w & CONV_G2));
        s = {msg[k], s[5:1]};
        in_valid = 1; @(negedge clk); in_valid = 0; @(negedge clk);
      end
      flush = 1; @(negedge clk); flush = 0;
      repeat (3) @(negedge clk);
      while (flushing) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++; if (nout != nb) begin failures++; $display("nout %0d nb %0d", nout, nb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
