// peak_interp: fine CFO estimate from the spectral peak and its two
// neighbours (arctangent interpolation).
//
// How it works: with P[-1], P[0], P[+1] the magnitudes around the peak bin,
// a multiplexer picks the smaller neighbour (P[-1] when P[+1] > P[-1], else
// P[+1]); a = P[0] - that neighbour, b = P[+1] - P[-1]. Because |b| <= a the
// angle atan(b/a) lies in [-pi/4, pi/4]; scaling it by (1/2)/(pi/4) gives a
// fraction of a bin in [-1/2, 1/2], which is added to index - M/2.
// Interface: in_valid with the three magnitudes and the peak index (index of
// an FFT-shifted spectrum, 0..M-1); one clock later out_valid with cfo_q8,
// the offset in bins with 8 fractional bits.
// Paper vs design: the multiplexer, the two differences, the arctangent, the
// (1/2)/(pi/4) scaling and the "+ Index - 64" follow the CFO estimation inset
// of the receiver figure. The subtraction order (which operand is negated) is
// not printed and is chosen so that the fraction points towards the larger
// neighbour. The arctangent uses the shared vectoring CORDIC.
module peak_interp
  import lrfhss_pkg::*;
#(
  parameter int M = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [31:0]          p_m1,
  input  logic [31:0]          p_0,
  input  logic [31:0]          p_p1,
  input  logic [$clog2(M)-1:0] index,
  output logic                 out_valid,
  output logic signed [31:0]   cfo_q8
);
  logic [31:0] mux_v;
  logic signed [31:0] a, b;
  phase_t      ang;
  always_comb begin
    mux_v = (p_p1 > p_m1) ? p_m1 : p_p1;
    // keep the CORDIC inputs below 2^28
    a   = int'((p_0 - mux_v) >> 4);
    b   = int'(($signed({1'b0, p_p1}) - $signed({1'b0, p_m1})) >>> 4);
    ang = (a == 0) ? phase_t'(0) : atan2_ph(a, b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; cfo_q8 <= '0;
    end else begin
      out_valid <= in_valid;
      // atan in phase_t units: pi/4 = 8192, so the bin fraction is ang/16384
      // and in Q8 it is ang/64
      if (in_valid)
        cfo_q8 <= ((int'(index) - M / 2) <<< 8) + (int'($signed(ang)) >>> 6);
    end
  end
endmodule
