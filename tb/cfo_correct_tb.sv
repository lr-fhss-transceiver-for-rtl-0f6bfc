// cfo_correct_tb: a tone with a frequency ramp (CFO plus Doppler rate) is
// corrected with the matching freq0/rate; every output must be the constant
// starting phasor within a small CORDIC error. A second run with rate 0
// checks a plain CFO, and a wrong frequency must leave a rotating output.
module cfo_correct_tb;
  import lrfhss_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, out_valid;
  logic signed [31:0] freq0 = 0, rate = 0;
  cplx_t in_sample = '0, out_sample;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cfo_correct dut (.*);
  real maxerr;
  always @(posedge clk) if (rst_n && out_valid) begin
    real e;
    e = $sqrt((real'(out_sample.i) - 3000.0) ** 2 + (real'(out_sample.q) - 2000.0) ** 2);
    if (e > maxerr) maxerr = e;
  end
  task automatic run(input real f, input real r, input real fc, input real rc, input bit good);
    real ph;
    maxerr = 0.0;
    freq0 = 32'(longint'(fc / (2.0 * PI) * 4294967296.0));
    rate  = 32'(longint'(rc / (2.0 * PI) * 4294967296.0));
    start = 1; @(negedge clk); start = 0;
    for (int n = 0; n < 300; n++) begin
      ph = f * n + r * n * (n + 1) / 2.0;
      in_sample.i = 16'($rtoi(3000.0 * $cos(ph) - 2000.0 * $sin(ph)));
      in_sample.q = 16'($rtoi(3000.0 * $sin(ph) + 2000.0 * $cos(ph)));
      in_valid = 1; @(negedge clk); in_valid = 0; @(negedge clk);
    end
    checks++;
    if (good ? (maxerr > 20.0) : (maxerr < 500.0)) begin failures++; $display("max error %f", maxerr); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(0.05, 0.0003, 0.05, 0.0003, 1);
    run(-0.3, 0.0, -0.3, 0.0, 1);
    run(0.1, -0.0001, 0.1, -0.0001, 1);
    run(0.1, 0.0, 0.0, 0.0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
