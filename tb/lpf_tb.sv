// lpf_tb: random complex samples through the default 1-6-1 filter, each
// output compared with the reference convolution (shift 3, saturating);
// start must clear the delay line.
module lpf_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, out_valid;
  cplx_t in_sample = '0, out_sample;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  lpf dut (.*);
  int xi [3], xq [3];
  cplx_t e;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++; if (out_sample !== e) begin failures++; $display("got %0d exp %0d  x %0d %0d %0d", out_sample.i, e.i, xi[0], xi[1], xi[2]); end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      start = 1; @(negedge clk); start = 0;
      xi = '{0, 0, 0}; xq = '{0, 0, 0};
      for (int n = 0; n < 50; n++) begin
        in_sample.i = 16'($signed($urandom % 16000) - 8000); in_sample.q = 16'($signed($urandom % 16000) - 8000);
        xi[2] = xi[1]; xi[1] = xi[0]; xi[0] = int'(in_sample.i);
        xq[2] = xq[1]; xq[1] = xq[0]; xq[0] = int'(in_sample.q);
        e.i = sat16((xi[0] + 6 * xi[1] + xi[2]) >>> 3);
        e.q = sat16((xq[0] + 6 * xq[1] + xq[2]) >>> 3);
        in_valid = 1; @(negedge clk); in_valid = 0; @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
