// cfo_phase_est_tb: the 34 known symbols in the rotated domain,
// 4096*e^{j(krot(k) + theta0 + w*k)}, with random theta0 and a residual
// frequency w of up to +/-0.05 rad/symbol, plus small noise. dphi must match w
// within 0.003 rad and phi_target the phase theta0 + w*57 within 0.06 rad.
module cfo_phase_est_tb;
  import lrfhss_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, done;
  cplx_t in_sample = '0;
  ph32_t phi_target;
  logic signed [31:0] dphi;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cfo_phase_est dut (.*);
  function automatic real wrapd(input real x);
    while (x > PI) x -= 2.0 * PI;
    while (x < -PI) x += 2.0 * PI;
    return x;
  endfunction
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      real th0, w, ph, gw, gph;
      bit seen;
      th0 = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      w   = 0.1 * (real'($urandom % 1000) / 1000.0 - 0.5);
      seen = 0;
      start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < NKNOWN; k++) begin
        ph = 2.0 * PI * real'(krot(7'(k))) / 65536.0 + th0 + w * k;
        in_sample.i = 16'($rtoi(4096.0 * $cos(ph)) + int'($urandom % 101) - 50);
        in_sample.q = 16'($rtoi(4096.0 * $sin(ph)) + int'($urandom % 101) - 50);
        in_valid = 1; @(negedge clk); in_valid = 0;
        if (done) seen = 1;
        @(negedge clk);
        if (done) seen = 1;
      end
      repeat (3) begin @(negedge clk); if (done) seen = 1; end
      gw  = 2.0 * PI * real'(dphi) / 4294967296.0;
      gph = 2.0 * PI * real'(phi_target) / 4294967296.0;
      checks += 3;
      if (!seen) failures++;
      if (wrapd(gw - w) > 0.003 || wrapd(gw - w) < -0.003) begin failures++; $display("dphi %f exp %f", gw, w); end
      if (wrapd(gph - (th0 + w * HDR_MID)) > 0.06 || wrapd(gph - (th0 + w * HDR_MID)) < -0.06) begin
        failures++; $display("phi %f exp %f", wrapd(gph), wrapd(th0 + w * HDR_MID));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
