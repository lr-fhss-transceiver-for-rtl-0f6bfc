// gmsk_mapper_tb: random blocks of bits (idle cycle between bits). For each
// bit the half-symbol sample and the symbol-instant sample must come out in
// that order; their phases must equal the reference
//   phi(k) = (pi/2)*sum_{i<=k-2} a_i + (3pi/8) a_{k-1} + (pi/8) a_k,
// the midway phase before it, and each sample must be 4096*e^{j*phase} within
// a few LSB.
module gmsk_mapper_tb;
  import lrfhss_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, in_valid = 0, in_bit = 0, in_first = 0, out_valid, out_sym;
  cplx_t out_sample;
  phase_t out_phase;
  int checks = 0, failures = 0;
  phase_t exp_ph [$];
  bit     exp_sym [$];
  always #5 clk = ~clk;
  gmsk_mapper dut (.*);
  always @(posedge clk) if (rst_n && out_valid) begin
    phase_t e;
    real ei, eq;
    checks++;
    if (exp_ph.size() == 0) failures++;
    else begin
      e = exp_ph.pop_front();
      if (out_phase !== e || out_sym !== exp_sym.pop_front()) failures++;
      ei = 4096.0 * $cos(2.0 * PI * real'(e) / 65536.0); eq = 4096.0 * $sin(2.0 * PI * real'(e) / 65536.0);
      checks++;
      if ((real'(out_sample.i) - ei) ** 2 + (real'(out_sample.q) - eq) ** 2 > 64.0) failures++;
    end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      int acc, aprev, ph, php;
      acc = 0; aprev = -1; php = -GMSK_C1 - GMSK_C0;
      for (int k = 0; k < 60; k++) begin
        int a;
        logic b;
        b = 1'($urandom); a = b ? 1 : -1;
        ph = acc + GMSK_C1 * aprev + GMSK_C0 * a;
        exp_ph.push_back(phase_t'(php + (ph - php) / 2)); exp_sym.push_back(0);
        exp_ph.push_back(phase_t'(ph));                   exp_sym.push_back(1);
        acc += 16384 * aprev; aprev = a; php = ph;
        in_valid = 1; in_bit = b; in_first = (k == 0); @(negedge clk);
        in_valid = 0; in_first = 0; @(negedge clk);
      end
      repeat (3) @(negedge clk);
      checks++; if (exp_ph.size() != 0) begin failures++; exp_ph.delete(); exp_sym.delete(); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
