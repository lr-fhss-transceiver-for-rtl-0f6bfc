// interleaver_tb: header mode checks that output position p carries coded bit
// j with hdr_deint_src(p+1)... expressed through the inverse: the bit written
// as coded bit j appears at address hdr_deint_src(j)-1. Payload mode with a
// random number of blocks n checks output address (j mod n)*48 + j div n for
// coded bit j, and zeros at the padding addresses.
module interleaver_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, hdr = 0, in_valid = 0, in_bit = 0, in_done = 0;
  logic [5:0] n_frag = '0;
  logic out_valid, out_bit, out_last;
  int checks = 0, failures = 0, nout;
  bit expv [0:4095];
  always #5 clk = ~clk;
  interleaver dut (.*);
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++; if (out_bit !== expv[nout]) failures++;
    nout++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      int n, ncode, total;
      hdr = (r % 3 == 0); n = 1 + $urandom % 8; n_frag = 6'(n);
      total = hdr ? HDR_CODED : n * FRAG_BITS;
      ncode = hdr ? HDR_CODED : total - $urandom % 40;
      for (int a = 0; a < 4096; a++) expv[a] = 0;
      nout = 0;
      start = 1; @(negedge clk); start = 0;
      for (int j = 0; j < ncode; j++) begin
        logic b;
        b = 1'($urandom);
        if (hdr) expv[hdr_deint_src(j) - 1] = b; else expv[(j % n) * FRAG_BITS + j / n] = b;
        in_valid = 1; in_bit = b; @(negedge clk); in_valid = 0;
      end
      in_done = 1; @(negedge clk); in_done = 0;
      repeat (total + 10) @(negedge clk);
      checks++; if (nout != total) begin failures++; $display("nout %0d total %0d", nout, total); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
