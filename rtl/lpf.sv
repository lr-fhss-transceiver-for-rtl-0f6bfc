// lpf: symmetric low-pass FIR filter on complex samples.
//
// How it works: a shift register of the last NT samples, a multiply-add with
// the integer taps and a right shift by SHIFT (the taps sum to 2^SHIFT, so
// the DC gain is one). Output sample n is centred on input sample
// n - (NT-1)/2; the receivers account for this delay when they choose the
// symbol timing.
// Interface: start clears the delay line; each in_valid produces out_valid
// one clock later.
// Paper vs design: the receiver chains contain an "LPF" after the CFO
// correction; its order and taps are not given, the default 1-6-1 / 8 is this
// design's choice (mild, so that the GMSK phase at the two sample instants
// per symbol is hardly changed).
module lpf
  import lrfhss_pkg::*;
#(
  parameter int NT = 3,
  parameter int TAPS [NT] = '{1, 6, 1},
  parameter int SHIFT = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  in_valid,
  input  cplx_t in_sample,
  output logic  out_valid,
  output cplx_t out_sample
);
  cplx_t dl_q [NT];
  logic signed [31:0] si, sq;

  always_comb begin
    si = TAPS[0] * int'(in_sample.i);
    sq = TAPS[0] * int'(in_sample.q);
    for (int i = 1; i < NT; i++) begin
      si += TAPS[i] * int'(dl_q[i-1].i);
      sq += TAPS[i] * int'(dl_q[i-1].q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NT; i++) dl_q[i] <= '0;
      out_valid <= 1'b0; out_sample <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        for (int i = 0; i < NT; i++) dl_q[i] <= '0;
      end else if (in_valid) begin
        dl_q[0] <= in_sample;
        for (int i = 1; i < NT; i++) dl_q[i] <= dl_q[i-1];
        out_valid    <= 1'b1;
        out_sample.i <= sat16(si >>> SHIFT);
        out_sample.q <= sat16(sq >>> SHIFT);
      end
    end
  end
endmodule
