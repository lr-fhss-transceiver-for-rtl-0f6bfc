// channelizer_tb: reduced 64-point channelizer with 48 channels. The input is
// the sum of a tone in bin +5 (amplitude 8000) and one in bin -10 (amplitude
// 4000). For every hop after the first full buffer, the two channels must
// show the Hann-window gain (about 4000 and 2000, within 10 %), every channel
// at least two bins away from both tones must stay below 100, and each tone
// channel must be a continuous stream: its output may not change by more
// than 5 % from hop to hop (this checks the odd-bin sign correction). Each hop
// must deliver exactly 48 outputs.
module channelizer_tb;
  import lrfhss_pkg::*;
  localparam int LOG2N = 6, N = 1 << LOG2N, NCH = 48;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  cplx_t in_sample = '0, out_sample;
  logic [$clog2(NCH)-1:0] out_ch;
  logic [15:0] out_hop;
  int checks = 0, failures = 0, nout, nhops;
  cplx_t prev [NCH];
  bit have_prev;
  always #5 clk = ~clk;
  channelizer #(.LOG2N(LOG2N), .NCH(NCH)) dut (.*);
  function automatic real mag(input cplx_t z);
    return $sqrt(real'(z.i) ** 2 + real'(z.q) ** 2);
  endfunction
  always @(posedge clk) if (rst_n && out_valid) begin
    int c, b;
    real m;
    cplx_t d;
    c = int'(out_ch); b = c - NCH / 2; m = mag(out_sample);
    if (out_hop >= 16'd2) begin
      checks++;
      if (b == 5 && (m < 3600.0 || m > 4400.0)) begin failures++; $display("bin 5 magnitude %f", m); end
      else if (b == -10 && (m < 1800.0 || m > 2200.0)) begin failures++; $display("bin -10 magnitude %f", m); end
      else if ((b > 6 || b < 4) && (b > -9 || b < -11) && m > 100.0) begin failures++; $display("bin %0d magnitude %f", b, m); end
      if (have_prev && (b == 5 || b == -10)) begin
        d.i = 16'(int'(out_sample.i) - int'(prev[c].i)); d.q = 16'(int'(out_sample.q) - int'(prev[c].q));
        checks++;
        if (mag(d) > 0.05 * m) begin failures++; $display("bin %0d jumps by %f", b, mag(d)); end
      end
    end
    prev[c] = out_sample;
    nout++;
    if (c == NCH - 1) begin
      checks++; if (nout != NCH) failures++;
      nout = 0; nhops++;
      if (out_hop >= 16'd2) have_prev = 1;
    end
  end
  initial begin
    nout = 0; nhops = 0; have_prev = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 8 * N; n++) begin
      real p1, p2;
      p1 = 2.0 * PI * 5.0 * n / N; p2 = -2.0 * PI * 10.0 * n / N;
      in_sample.i = 16'($rtoi(8000.0 * $cos(p1) + 4000.0 * $cos(p2)));
      in_sample.q = 16'($rtoi(8000.0 * $sin(p1) + 4000.0 * $sin(p2)));
      in_valid = 1;
      @(posedge clk); while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
      @(negedge clk);
    end
    repeat (2000) @(negedge clk);
    checks++; if (nhops < 12) begin failures++; $display("hops %0d", nhops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
