// cfo_correct: frequency (and Doppler-rate) correction by a numerically
// controlled oscillator.
//
// How it works: a 32-bit phase accumulator advances by freq each sample and
// freq itself advances by rate each sample, so the removed phase is
// freq*n + rate*n*(n+1)/2. Each input sample is rotated by minus the top 16
// bits of the phase with the shared CORDIC rotation.
// Interface: start loads freq0/rate and clears the phase; then every in_valid
// sample comes out one clock later with out_valid.
// Units: freq0 in 2^32 = 2*pi per sample, rate in 2^32 = 2*pi per sample^2.
// Paper vs design: the receiver has a "CFO correct" block in the header
// chain and a "Doppler & CFO correct" block in the payload chain; this one
// module serves both (rate = 0 for the header). The NCO structure is this
// design's choice.
module cfo_correct
  import lrfhss_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic signed [31:0] freq0,
  input  logic signed [31:0] rate,
  input  logic               in_valid,
  input  cplx_t              in_sample,
  output logic               out_valid,
  output cplx_t              out_sample
);
  ph32_t              ph_q;
  logic signed [31:0] f_q, r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q <= '0; f_q <= '0; r_q <= '0; out_valid <= 1'b0; out_sample <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        ph_q <= '0; f_q <= freq0; r_q <= rate;
      end else if (in_valid) begin
        out_valid  <= 1'b1;
        out_sample <= cplx_rot(in_sample, phase_t'(-ph_q[31:16]));
        ph_q       <= ph_q + ph32_t'(f_q + r_q);
        f_q        <= f_q + r_q;
      end
    end
  end
endmodule
