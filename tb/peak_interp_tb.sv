// peak_interp_tb: random peak magnitudes P[0] >= P[-1], P[+1] and random peak
// indices; cfo_q8 must equal 256*(index-64) + (1/2)/(pi/4)*atan(b/a)*256 with
// a = P[0] - min(P[-1], P[+1]) and b = P[+1] - P[-1], within 2 (of 256 per
// bin); equal neighbours must give an exact integer bin.
module peak_interp_tb;
  import lrfhss_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] p_m1 = '0, p_0 = '0, p_p1 = '0;
  logic [6:0] index = '0;
  logic signed [31:0] cfo_q8;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  peak_interp dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      real a, b, e;
      longint pm, pp, p0;
      p0 = 1000 + $urandom % 2000000000;
      pm = (r % 10 == 0) ? p0 / 3 : longint'($urandom % 1000000) * p0 / 1000000;
      pp = (r % 10 == 0) ? p0 / 3 : longint'($urandom % 1000000) * p0 / 1000000;
      p_0 = 32'(p0); p_m1 = 32'(pm); p_p1 = 32'(pp); index = 7'($urandom);
      a = real'(p0 - ((pm < pp) ? pm : pp)); b = real'(pp - pm);
      e = 256.0 * (real'(index) - 64.0) + ((a > 0.0) ? $atan2(b, a) / (PI / 4.0) * 128.0 : 0.0);
      in_valid = 1; @(negedge clk); in_valid = 0;
      while (!out_valid) @(negedge clk);
      checks++;
      if (real'(cfo_q8) - e > 2.0 || e - real'(cfo_q8) > 2.0) begin failures++; $display("got %0d exp %f", cfo_q8, e); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
