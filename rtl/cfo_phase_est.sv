// cfo_phase_est: residual CFO and carrier phase from the known leading
// symbols of a hopping block, in the rotated (k*pi/2 removed) domain.
//
// How it works: each of the first NK symbols is de-rotated by its known
// phase pi*b(k) + 3pi/8*a(k-1) + pi/8*a(k), giving z(k) = A*e^{j*theta(k)}.
// S = sum z(k) gives the phase at the centre of the known part and
// D = sum z(k)*conj(z(k-1)) the phase advance per symbol. The phase is then
// extrapolated to symbol TARGET: phi = arg(S) + arg(D) * (TARGET - (NK-1)/2).
// Interface: start, then one sample per symbol (out of phase_rotate). done
// pulses after symbol NK-1 with phi_target (2^32 = 2*pi) and dphi (per
// symbol, 2^32 = 2*pi).
// Paper vs design: "CFO & Phase estimation" follows the phase rotation in both
// chains. The header uses the 34 preamble+syncword symbols (NK = 34), the
// payload its 2 preamble symbols (NK = 2; there the CFO from the header is
// used and dphi only refines it). The estimator form is this design's choice.
module cfo_phase_est
  import lrfhss_pkg::*;
#(
  parameter int NK     = PRE_SYMS + SYNC_SYMS,
  parameter int TARGET = HDR_MID
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               in_valid,
  input  cplx_t              in_sample,
  output logic               done,
  output ph32_t              phi_target,
  output logic signed [31:0] dphi
);
  localparam longint EXT = longint'(2 * TARGET + 1) - longint'(NK);  // 2*(TARGET - centre)
  logic [6:0] k_q;
  logic       run_q;
  cplx_t      zprev_q;
  logic signed [31:0] s_i_q, s_q_q, d_i_q, d_q_q;

  cplx_t z;
  logic signed [31:0] s_i, s_q, d_i, d_q;
  always_comb begin
    z   = cplx_rot(in_sample, phase_t'(-krot(k_q)));
    s_i = s_i_q + int'(z.i);
    s_q = s_q_q + int'(z.q);
    d_i = d_i_q;
    d_q = d_q_q;
    if (k_q != 7'd0) begin
      d_i += (int'(z.i) * int'(zprev_q.i) + int'(z.q) * int'(zprev_q.q)) >>> 8;
      d_q += (int'(z.q) * int'(zprev_q.i) - int'(z.i) * int'(zprev_q.q)) >>> 8;
    end
  end

  phase_t ph_s, ph_d;
  assign ph_s = atan2_ph(s_i, s_q);
  assign ph_d = atan2_ph(d_i, d_q);
  logic signed [31:0] dp;
  assign dp = (NK > 1) ? {ph_d, 16'h0000} : 32'sd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_q <= '0; run_q <= 1'b0; zprev_q <= '0;
      s_i_q <= 0; s_q_q <= 0; d_i_q <= 0; d_q_q <= 0;
      done <= 1'b0; phi_target <= '0; dphi <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        k_q <= '0; run_q <= 1'b1; s_i_q <= 0; s_q_q <= 0; d_i_q <= 0; d_q_q <= 0;
      end else if (in_valid && run_q) begin
        zprev_q <= z;
        s_i_q <= s_i; s_q_q <= s_q; d_i_q <= d_i; d_q_q <= d_q;
        k_q <= k_q + 7'd1;
        if (k_q == 7'(NK - 1)) begin
          run_q <= 1'b0;
          done  <= 1'b1;
          dphi  <= dp;
          // (2*TARGET - (NK-1)) / 2 symbols from the centre of the known part
          phi_target <= {ph_s, 16'h0000} + ph32_t'((longint'(dp) * EXT) >>> 1);
        end
      end
    end
  end
endmodule
