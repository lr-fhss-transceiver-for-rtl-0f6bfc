// fft_iter_tb: default 128-point transform. Random complex inputs and a pure
// tone are loaded, the transform is run, and every bin is compared with a
// reference DFT divided by N (the block's scaling) within 24 LSB; the clock
// count from go to done must be LOG2N*N/2.
module fft_iter_tb;
  import lrfhss_pkg::*;
  localparam int LOG2N = 7, N = 1 << LOG2N;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, wr_en = 0, go = 0, busy, done;
  logic [LOG2N-1:0] wr_addr = '0, rd_addr = '0;
  cplx_t wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  real xr [N], xi [N];
  always #5 clk = ~clk;
  fft_iter #(.LOG2N(LOG2N)) dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      int cyc;
      real maxe;
      for (int n = 0; n < N; n++) begin
        if (r == 0) begin
          xr[n] = 8000.0 * $cos(2.0 * PI * 17.0 * n / N); xi[n] = 8000.0 * $sin(2.0 * PI * 17.0 * n / N);
        end else begin
          xr[n] = real'($signed($urandom % 16000) - 8000); xi[n] = real'($signed($urandom % 16000) - 8000);
        end
        wr_en = 1; wr_addr = LOG2N'(n); wr_data.i = 16'($rtoi(xr[n])); wr_data.q = 16'($rtoi(xi[n]));
        xr[n] = real'(wr_data.i); xi[n] = real'(wr_data.q);
        @(negedge clk);
      end
      wr_en = 0; go = 1; @(negedge clk); go = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc != LOG2N * N / 2 + 1) begin failures++; $display("cycles %0d", cyc); end
      maxe = 0.0;
      for (int k = 0; k < N; k++) begin
        real sr, si, e;
        sr = 0.0; si = 0.0;
        for (int n = 0; n < N; n++) begin
          sr += xr[n] * $cos(2.0 * PI * k * n / N) + xi[n] * $sin(2.0 * PI * k * n / N);
          si += xi[n] * $cos(2.0 * PI * k * n / N) - xr[n] * $sin(2.0 * PI * k * n / N);
        end
        sr /= N; si /= N;
        rd_addr = LOG2N'(k); #1;
        e = $sqrt((real'(rd_data.i) - sr) ** 2 + (real'(rd_data.q) - si) ** 2);
        if (e > maxe) maxe = e;
        checks++; if (e > 24.0) failures++;
      end
      $display("run %0d max error %f", r, maxe);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
