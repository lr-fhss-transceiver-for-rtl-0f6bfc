// header_sova_tb: builds 114-symbol header blocks (preamble, syncword, random
// coded bits) with an independent real-valued GMSK model, rotated by k*pi/2,
// with a phase offset, a CFO and a Doppler rate equal to one of the
// candidates. Checks that the best of the three output sequences reproduces
// every symbol, that 3 x 114 soft bits come out, that the winning Doppler
// candidate is the one applied (within one step), and the block latency.
module header_sova_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, out_valid, done;
  cplx_t in_sample;
  ph32_t phi_p_mid;
  logic signed [31:0] phi_f;
  logic signed [15:0] ua, ub, uc;
  logic [1:0] out_seq;
  logic [6:0] out_idx;
  llr_t out_llr;
  logic [3:0] best_cand;
  logic [N_DR_CAND-1:0] cand_used;
  int checks = 0, failures = 0;

  header_sova dut (.*);

  logic bits [HDR_SYMS];
  llr_t got [3][HDR_SYMS];
  int nout;
  always @(posedge clk) if (out_valid) begin got[out_seq][out_idx] = out_llr; nout++; end

  localparam real PI = 3.14159265358979;
  localparam real TS = 2.048e-3;

  task automatic run(input real ph0, input real fhz, input int cand, input int seed);
    real acc, ph, rot, chp, f, rho;
    int am1, a, t0, errs;
    f   = 2.0 * PI * fhz * TS;                       // rad per symbol
    rho = 2.0 * PI * (cand - 5) * 80.0 * TS * TS;    // rad per symbol^2
    for (int k = 0; k < HDR_SYMS; k++)
      bits[k] = (k < PRE_SYMS + SYNC_SYMS) ? hdr_known_bit(k) : 1'($urandom(seed + k) & 1);
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    nout = 0; t0 = $time;
    acc = 0.0; am1 = -1;
    for (int k = 0; k < HDR_SYMS; k++) begin
      a   = bits[k] ? 1 : -1;
      ph  = acc + 3.0 * PI / 8.0 * am1 + PI / 8.0 * a;
      rot = ph + PI / 2.0 * k;
      chp = ph0 + f * k + rho * k * (k + 1) / 2.0;
      if (k == HDR_MID) begin
        // the input is the linear extrapolation from the known part's centre
        phi_p_mid = ph32_t'(longint'((chp - rho * 820.125) / (2.0 * PI) * 4294967296.0));
      end
      in_sample.i = 16'($rtoi(4096.0 * $cos(rot + chp)));
      in_sample.q = 16'($rtoi(4096.0 * $sin(rot + chp)));
      in_valid = 1; @(negedge clk); in_valid = 0;
      acc = acc + PI / 2.0 * am1;
      am1 = a;
    end
    // the channel phase at the middle must be known before the searches start
    phi_f = 32'(longint'((f + rho * (HDR_MID - 40.5)) / (2.0 * PI) * 4294967296.0));
    while (!done) @(negedge clk);
    checks++;
    if (nout != 3 * HDR_SYMS) begin failures++; $display("nout %0d", nout); end
    errs = 0;
    for (int k = 1; k < HDR_SYMS; k++) if ((got[0][k] > 0) !== bits[k]) errs++;
    checks++;
    if (errs != 0) begin failures++; $display("seq0 errors %0d (cand %0d best %0d)", errs, cand, best_cand); end
    checks++;
    if (int'(best_cand) > cand + 1 || int'(best_cand) < cand - 1) begin
      failures++; $display("best cand %0d, applied %0d", best_cand, cand);
    end
    checks++;
    if (cand_used != 11'b000_0000_0000 && $countones(cand_used) != 3) failures++;
    checks++;  // one block: 22 searches of 57..58 symbols plus flushes and 342 outputs
    if (($time - t0) / 10 > 3000) begin failures++; $display("latency %0d", ($time - t0) / 10); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_sample = '0; phi_p_mid = '0; phi_f = '0;
    ua = 16'sd16000; ub = 16'sd1600; uc = 16'sd100;
    repeat (3) @(negedge clk); rst_n = 1;
    run(0.4, 3.0, 5, 5);
    run(-1.0, -10.0, 8, 7);
    run(2.0, 6.0, 0, 9);
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
