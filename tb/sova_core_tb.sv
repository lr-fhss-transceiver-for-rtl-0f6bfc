// sova_core_tb: drives the 4-state SOVA with GMSK samples generated here with
// real arithmetic (phase rotated by k*pi/2, constant phase offset and a CFO),
// and checks that every symbol decision and the sign of every soft bit match
// the transmitted symbols, that exactly one output per input appears, and
// that the best path metric is positive. A second run uses a Doppler rate
// with a matching initial rate, and a third a noisy run must still decode.
module sova_core_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, flush, flushing, out_valid, out_bit;
  ph32_t phi_p0;
  logic signed [31:0] phi_f0, phi_dr0, best_pm;
  logic signed [15:0] ua, ub, uc;
  cplx_t in_sample;
  llr_t out_llr;
  int checks = 0, failures = 0;

  sova_core dut (.*);

  localparam int NSYM = 120;
  logic bits [NSYM];
  int   nout;
  logic got [NSYM];
  llr_t gotl [NSYM];

  always @(posedge clk) if (out_valid) begin
    if (nout < NSYM) begin got[nout] = out_bit; gotl[nout] = out_llr; end
    nout++;
  end

  function automatic real wrap(input real x); return x; endfunction

  task automatic run(input real ph0, input real f, input real dr, input real noise, input int seed);
    real acc, ph, rot, chp, pi;
    int am1, a;
    int s;
    pi = 3.14159265358979;
    s = seed;
    for (int k = 0; k < NSYM; k++) bits[k] = 1'($urandom(s + k) & 1);
    @(negedge clk);
    phi_p0  = ph32_t'(longint'(ph0 / (2.0 * pi) * 4294967296.0));
    phi_f0  = 32'(longint'(f / (2.0 * pi) * 4294967296.0));
    phi_dr0 = 32'(longint'(dr / (2.0 * pi) * 4294967296.0));
    start = 1; @(negedge clk); start = 0;
    nout = 0;
    acc = 0.0; am1 = -1;
    for (int k = 0; k < NSYM; k++) begin
      a   = bits[k] ? 1 : -1;
      ph  = acc + 3.0 * pi / 8.0 * am1 + pi / 8.0 * a;
      rot = ph + pi / 2.0 * k;
      chp = ph0 + f * k + dr * k * (k + 1) / 2.0;
      in_sample.i = 16'($rtoi(4096.0 * $cos(rot + chp)) + ($urandom() % 2001) * noise - 1000 * noise);
      in_sample.q = 16'($rtoi(4096.0 * $sin(rot + chp)) + ($urandom() % 2001) * noise - 1000 * noise);
      in_valid = 1; @(negedge clk); in_valid = 0;
      acc = acc + pi / 2.0 * am1;
      am1 = a;
    end
    flush = 1; @(negedge clk); flush = 0;
    while (flushing || nout < NSYM) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++; if (nout != NSYM) begin failures++; $display("count %0d", nout); end
    for (int k = 1; k < NSYM; k++) begin
      checks++;
      if (got[k] !== bits[k] || (gotl[k] > 0) !== bits[k]) begin
        failures++; if (failures < 10) $display("sym %0d exp %0d got %0d llr %0d", k, bits[k], got[k], gotl[k]);
      end
    end
    checks++; if (best_pm <= 0) failures++;
  endtask

  initial begin
    start = 0; in_valid = 0; flush = 0; in_sample = '0;
    ua = 16'sd16000; ub = 16'sd1600; uc = 16'sd100;
    repeat (3) @(negedge clk); rst_n = 1;
    run(0.7, 0.02, 0.0, 0.0, 11);
    run(-2.0, -0.05, 0.0005, 0.0, 23);
    run(1.3, 0.01, 0.0, 1.0, 37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
