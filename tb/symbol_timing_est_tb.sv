// symbol_timing_est_tb: header blocks are built by a reference GMSK model
// (two samples per symbol: the midway phase, then the symbol-instant phase)
// with a random carrier phase, a small residual frequency and noise. Fed as
// is, the symbol instants are the odd samples and phase must be 1; with the
// first (midway) sample dropped they are the even samples and phase must be 0.
module symbol_timing_est_tb;
  import lrfhss_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, done, phase;
  cplx_t in_sample = '0;
  logic [31:0] metric0, metric1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  symbol_timing_est dut (.*);
  real ph [2 * HDR_SYMS + 1];
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      real acc, php, p, th0, w;
      int aprev, shift;
      bit seen, got;
      shift = r % 2;
      th0 = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      w = 0.02 * (real'($urandom % 1000) / 1000.0 - 0.5);
      acc = 0.0; aprev = -1; php = -PI / 2.0;
            for (int k = 0; k < HDR_SYMS; k++) begin
        int a;
        a = (k < NKNOWN ? hdr_known_bit(k) : 1'($urandom)) ? 1 : -1;
        p = acc + 3.0 * PI / 8.0 * aprev + PI / 8.0 * a;
        ph[2 * k]     = (php + p) / 2.0;
        ph[2 * k + 1] = p;
        acc += PI / 2.0 * aprev; aprev = a; php = p;
      end
      seen = 0;
      start = 1; @(negedge clk); start = 0;
      for (int n = 0; n < 2 * HDR_SYMS; n++) begin
        real q;
        q = ph[n + shift] + th0 + w * n / 2.0;
        in_sample.i = 16'($rtoi(4096.0 * $cos(q)) + int'($urandom % 401) - 200);
        in_sample.q = 16'($rtoi(4096.0 * $sin(q)) + int'($urandom % 401) - 200);
        in_valid = 1; @(negedge clk); in_valid = 0;
        if (done && !seen) begin seen = 1; got = phase; end
      end
      repeat (2) begin @(negedge clk); if (done && !seen) begin seen = 1; got = phase; end end
      checks += 2;
      if (!seen) failures++;
      if (got != (shift == 0)) begin failures++; $display("run %0d shift %0d phase %0d m0 %0d m1 %0d", r, shift, got, metric0, metric1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
