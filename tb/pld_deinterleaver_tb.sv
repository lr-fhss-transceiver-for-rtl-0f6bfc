// pld_deinterleaver_tb: for a random number n of hopping blocks, n*48 random
// soft bits are written in arrival order; output j must be the soft bit at
// address (j mod n)*48 + j div n (stride-48 read), out_last on the final one.
module pld_deinterleaver_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, out_valid, out_last;
  logic [5:0] n_frag = '0;
  llr_t in_llr = '0, out_llr;
  llr_t wr [MAX_FRAGS*FRAG_BITS];
  int checks = 0, failures = 0, nout, n;
  always #5 clk = ~clk;
  pld_deinterleaver dut (.*);
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (nout >= n * FRAG_BITS || out_llr !== wr[(nout % n) * FRAG_BITS + nout / n] ||
        out_last != (nout == n * FRAG_BITS - 1)) failures++;
    nout++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      n = (r == 3) ? MAX_FRAGS : 1 + $urandom % 10; n_frag = 6'(n); nout = 0;
      start = 1; @(negedge clk); start = 0;
      for (int j = 0; j < n * FRAG_BITS; j++) begin
        wr[j] = llr_t'($urandom);
        in_valid = 1; in_llr = wr[j]; @(negedge clk); in_valid = 0;
      end
      repeat (n * FRAG_BITS + 20) @(negedge clk);
      checks++; if (nout != n * FRAG_BITS) begin failures++; $display("nout %0d", nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
