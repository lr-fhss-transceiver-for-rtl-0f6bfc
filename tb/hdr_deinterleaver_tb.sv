// hdr_deinterleaver_tb: three blocks of 80 random soft bits; output j must be
// the soft bit written in position hdr_deint_src(j)-1, with out_last on j = 79.
module hdr_deinterleaver_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, out_valid, out_last;
  llr_t in_llr = '0, out_llr;
  llr_t wr [HDR_CODED];
  int checks = 0, failures = 0, nout;
  always #5 clk = ~clk;
  hdr_deinterleaver dut (.*);
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (nout >= HDR_CODED || out_llr !== wr[hdr_deint_src(nout) - 1] || out_last != (nout == HDR_CODED - 1)) failures++;
    nout++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      nout = 0;
      start = 1; @(negedge clk); start = 0;
      for (int j = 0; j < HDR_CODED; j++) begin
        wr[j] = llr_t'($urandom);
        in_valid = 1; in_llr = wr[j]; @(negedge clk); in_valid = 0;
        if ($urandom % 2) @(negedge clk);
      end
      repeat (100) @(negedge clk);
      checks++; if (nout != HDR_CODED) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
