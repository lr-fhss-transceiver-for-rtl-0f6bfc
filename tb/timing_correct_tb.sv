// timing_correct_tb: numbered samples at two per symbol; for both phases and
// a skip of 0 or 2 symbols the outputs must be samples 2*(k+skip)+phase, 114
// of them, with out_first/out_last/out_idx set right.
module timing_correct_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, phase = 0, in_valid = 0;
  logic [3:0] skip = 0;
  cplx_t in_sample = '0, out_sample;
  logic out_valid, out_first, out_last;
  logic [6:0] out_idx;
  int checks = 0, failures = 0, nout;
  always #5 clk = ~clk;
  timing_correct dut (.*);
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (int'(out_sample.i) != 2 * (nout + int'(skip)) + int'(phase) || int'(out_idx) != nout ||
        out_first != (nout == 0) || out_last != (nout == HDR_SYMS - 1)) failures++;
    nout++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      phase = r[0]; skip = r[1] ? 4'd2 : 4'd0; nout = 0;
      start = 1; @(negedge clk); start = 0;
      for (int n = 0; n < 240; n++) begin in_sample.i = 16'(n); in_valid = 1; @(negedge clk); end
      in_valid = 0; @(negedge clk);
      checks++; if (nout != HDR_SYMS) begin failures++; $display("nout %0d", nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
