// sova_core: 4-state soft-output trellis search (SOVA) for phase-rotated GMSK
// samples, with a per-state tracking loop for phase, CFO and Doppler rate.
//
// Trellis: state s = {b, a1} where b is the parity of the +1 symbols up to k-2
// and a1 the previous symbol (1 = +1). From state (b, a1) the input symbol a
// leads to state (b ^ a1, a) with the expected branch phase
//   theta = pi*b + (3*pi/8)*a1 + (pi/8)*a,  a multiple of 45 degrees
// (the branch phases 90, 45, 135, -135, -90, -45 of the paper's trellis).
// Every state keeps its own channel estimate (phi_p phase, phi_f CFO, phi_dr
// Doppler rate, phi_ds Doppler shift; ph32_t units per symbol). For a sample r
// and predecessor t the branch metric is Re{r * e^{-j(phi_p[t] + theta)}} and
// the phase error perr is the imaginary part of the same product. Of the two
// paths into a state the larger new path metric wins (path_sel); the new state
// inherits the winner's estimates updated with its perr:
//   phi_dr += uc*perr; phi_ds += phi_dr; phi_f += ub*perr;
//   phi_p  += phi_ds + phi_f + ua*perr        (products in ph32_t units)
// The winning symbol is appended to the state's 32-bit hard survival path and
// |m0 - m1| >> SOFT_SHIFT (saturated to 127) to its soft survival path.
// Output: once SURV symbols are held, every new sample first emits the oldest
// symbol of the state with the best path metric as a soft bit (out_llr,
// positive for +1) and hard bit; flush then emits the rest, oldest first, one
// per cycle. Every input symbol comes out once, in order.
// start loads the initial estimates into all four states and zeroes the path
// metrics. best_pm is the best state's path metric (used to rank Doppler
// candidates).
// The tracking equations, path selection, pm_diff soft bits, 32-deep survival
// path and best-state output follow the paper. The paper's text selects the
// smaller metric of a distance while its Eq. (5) maximises the correlation;
// this core maximises the correlation. Word widths, the soft-bit scaling and the
// single-cycle step (no pipeline registers) are this design's choices.
module sova_core
  import lrfhss_pkg::*;
#(
  parameter int SURV       = 32,
  parameter int SOFT_SHIFT = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  ph32_t              phi_p0,
  input  logic signed [31:0] phi_f0,
  input  logic signed [31:0] phi_dr0,
  input  logic signed [15:0] ua,
  input  logic signed [15:0] ub,
  input  logic signed [15:0] uc,
  input  logic               in_valid,
  input  cplx_t              in_sample,
  input  logic               flush,
  output logic               flushing,
  output logic               out_valid,
  output llr_t               out_llr,
  output logic               out_bit,
  output logic signed [31:0] best_pm
);
  localparam int CW = $clog2(SURV + 1);
  localparam int C8 [8] = '{16384, 11585, 0, -11585, -16384, -11585, 0, 11585};
  localparam int S8 [8] = '{0, 11585, 16384, 11585, 0, -11585, -16384, -11585};

  logic signed [31:0] pm_q [4];
  ph32_t              php_q [4];
  logic signed [31:0] phf_q [4], phdr_q [4], phds_q [4];
  logic [SURV-1:0]    svh_q [4];
  logic [6:0]         svs_q [4][SURV];

  logic signed [31:0] pm_n [4];
  ph32_t              php_n [4];
  logic signed [31:0] phf_n [4], phdr_n [4], phds_n [4];
  logic [SURV-1:0]    svh_n [4];
  logic [6:0]         svs_n [4][SURV];

  logic [CW-1:0] cnt_q, fl_q;
  logic [$clog2(SURV)-1:0] fl_idx;
  assign fl_idx = $clog2(SURV)'(fl_q - 1'b1);  // fl_q <= SURV, so the index fits
  logic          fl_act_q;
  logic [1:0]    best;

  // derotated sample per predecessor state
  cplx_t rr [4];
  always_comb for (int t = 0; t < 4; t++) rr[t] = cplx_rot(in_sample, phase_t'(-php_q[t][31:16]));

  always_comb begin
    for (int s = 0; s < 4; s++) begin
      logic [1:0] tp [2];
      int m [2], pe [2];
      int n45, bm, diff, mag;
      int sel;
      logic bb, u;
      bb = s[1]; u = s[0];
      tp[0] = {bb, 1'b0};
      tp[1] = {~bb, 1'b1};
      for (int i = 0; i < 2; i++) begin
        // theta in 45 degree units: 4*b + {a1,a}: ++ 2, +- 1, -+ -1, -- -2
        n45 = 4 * int'(tp[i][1]) + (tp[i][0] ? (u ? 2 : 1) : (u ? -1 : -2));
        n45 = n45 & 7;
        bm    = (int'(rr[tp[i]].i) * C8[n45] + int'(rr[tp[i]].q) * S8[n45]) >>> 14;
        pe[i] = (int'(rr[tp[i]].q) * C8[n45] - int'(rr[tp[i]].i) * S8[n45]) >>> 14;
        m[i]  = int'(pm_q[tp[i]]) + bm;
      end
      sel  = ($signed(m[1] - m[0]) > 0) ? 1 : 0;
      diff = m[0] - m[1];
      if (diff < 0) diff = -diff;
      mag  = diff >>> SOFT_SHIFT;
      if (mag > 127) mag = 127;
      pm_n[s]   = m[sel];
      phdr_n[s] = phdr_q[tp[sel]] + 32'(int'(uc) * pe[sel]);
      phds_n[s] = phds_q[tp[sel]] + phdr_n[s];
      phf_n[s]  = phf_q[tp[sel]] + 32'(int'(ub) * pe[sel]);
      php_n[s]  = php_q[tp[sel]] + ph32_t'(phds_n[s]) + ph32_t'(phf_n[s]) + ph32_t'(int'(ua) * pe[sel]);
      svh_n[s]  = {svh_q[tp[sel]][SURV-2:0], u};
      svs_n[s][0] = 7'(mag);
      for (int j = 1; j < SURV; j++) svs_n[s][j] = svs_q[tp[sel]][j-1];
    end
  end

  always_comb begin
    best = 2'd0;
    for (int s = 1; s < 4; s++)
      if ($signed(pm_q[s] - pm_q[best]) > 0) best = 2'(s);
  end
  assign best_pm  = pm_q[best];
  assign flushing = fl_act_q;

  function automatic llr_t mk_llr(input logic h, input logic [6:0] mag);
    return h ? llr_t'({1'b0, mag}) : llr_t'(-int'({1'b0, mag}));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 4; s++) begin
        pm_q[s] <= '0; php_q[s] <= '0; phf_q[s] <= '0; phdr_q[s] <= '0; phds_q[s] <= '0;
        svh_q[s] <= '0;
        for (int j = 0; j < SURV; j++) svs_q[s][j] <= '0;
      end
      cnt_q <= '0; fl_q <= '0; fl_act_q <= 1'b0;
      out_valid <= 1'b0; out_llr <= '0; out_bit <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        for (int s = 0; s < 4; s++) begin
          pm_q[s] <= '0; php_q[s] <= phi_p0; phf_q[s] <= phi_f0; phdr_q[s] <= phi_dr0;
          phds_q[s] <= '0; svh_q[s] <= '0;
          for (int j = 0; j < SURV; j++) svs_q[s][j] <= '0;
        end
        cnt_q <= '0; fl_act_q <= 1'b0;
      end else if (fl_act_q) begin
        if (fl_q != '0) begin
          out_valid <= 1'b1;
          out_bit   <= svh_q[best][fl_idx];
          out_llr   <= mk_llr(svh_q[best][fl_idx], svs_q[best][fl_idx]);
          fl_q      <= fl_q - 1'b1;
        end else begin
          fl_act_q <= 1'b0;
          cnt_q    <= '0;
        end
      end else if (flush) begin
        fl_act_q <= 1'b1;
        fl_q     <= cnt_q;
      end else if (in_valid) begin
        if (cnt_q == CW'(SURV)) begin
          out_valid <= 1'b1;
          out_bit   <= svh_q[best][SURV-1];
          out_llr   <= mk_llr(svh_q[best][SURV-1], svs_q[best][SURV-1]);
        end else cnt_q <= cnt_q + 1'b1;
        pm_q <= pm_n; php_q <= php_n; phf_q <= phf_n; phdr_q <= phdr_n; phds_q <= phds_n;
        svh_q <= svh_n; svs_q <= svs_n;
      end
    end
  end
endmodule
