// header_detector_tb: self-checking testbench for header_detector.
//
// What it does: builds the known part of a header block (2 preamble and 32
// syncword symbols) as a GMSK waveform at two samples per symbol, adds a
// random carrier offset and noise, surrounds it with noise, and feeds it to
// the detector. The rest of the header block is filled with samples of
// random phase. For every trial it checks that exactly one detection is
// reported, that det_pos points at the first sample of the block (within one
// sample), that cfo_q8 is within 2 Hz of the applied offset and that det_freq
// agrees with cfo_q8. A final noise-only run must give no detection.
// Timing: the detector takes one sample per window evaluation; the testbench
// waits for in_ready before each sample.
// Paper vs testbench: the sample rate (two samples per 488.28 Hz symbol) and
// frame layout follow the modulation description; the noise level and CFO
// range are testbench choices.
`timescale 1ns/1ps
module header_detector_tb;
  import lrfhss_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real TS = 2.048e-3;   // symbol duration
  logic clk = 0, rst_n = 1;
  logic in_valid = 0, in_ready, det_valid;
  cplx_t in_sample = '0;
  logic [31:0] det_pos, det_peak;
  logic signed [31:0] cfo_q8, det_freq;
  int checks = 0, failures = 0, ndet = 0;
  always #5 clk = ~clk;

  header_detector dut (.*);

  always @(posedge clk) if (rst_n && det_valid) ndet++;

  function automatic real nz();
    return real'($urandom() % 401) - 200.0;
  endfunction

  task automatic push(input real re, input real im);
    // called at a falling edge: wait for in_ready, then offer the sample for one rising edge
    while (!in_ready) @(negedge clk);
    in_sample = cplx_t'({16'($rtoi(re)), 16'($rtoi(im))}); in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
    @(negedge clk);
  endtask

  task automatic trial(input real fhz, input int lead, input bit with_block);
    int base, n0;
    real w, ph, a;
    w = 2.0 * PI * fhz * TS / 2.0;
    ndet = 0;
    base = int'(dut.n_q);
    for (int n = 0; n < lead; n++) push(nz(), nz());
    if (with_block)
      for (int n = 0; n < 2 * HDR_SYMS; n++) begin
        if (n >= 1 && n < 2 * (PRE_SYMS + SYNC_SYMS)) ph = real'(known_raw_phase_half(n - 1)) * 2.0 * PI / 65536.0;
        else ph = 2.0 * PI * real'($urandom() % 1000) / 1000.0;
        a = ph + w * n;
        push(4000.0 * $cos(a) + nz(), 4000.0 * $sin(a) + nz());
      end
    for (int n = 0; n < 70; n++) push(nz(), nz());
    repeat (5) @(negedge clk);
    checks++;
    if (ndet != (with_block ? 1 : 0)) begin failures++; $display("detections %0d", ndet); end
    if (with_block && ndet == 1) begin
      real est, fq;
      n0 = int'(det_pos) - base - lead;
      checks++;
      if (n0 < -1 || n0 > 1) begin failures++; $display("det_pos off by %0d (f %f lead %0d base %0d pos %0d)", n0, fhz, lead, base, det_pos); end
      est = real'(cfo_q8) / 256.0 * 976.5625 / 128.0;
      checks++;
      if (est - fhz > 2.0 || est - fhz < -2.0) begin failures++; $display("cfo %f Hz true %f", est, fhz); end
      fq = real'(det_freq) / 4294967296.0 * 976.5625;   // Hz
      checks++;
      if (fq - est > 0.5 || fq - est < -0.5) begin failures++; $display("det_freq %f Hz vs %f", fq, est); end
    end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int r = 0; r < 8; r++)
      trial(real'(int'($urandom() % 601) - 300), 20 + int'($urandom() % 41), 1'b1);
    trial(0.0, 100, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin repeat (20000000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
