// symbol_timing_est: decides which of the two samples per symbol is the
// symbol instant, using the known syncword.
//
// How it works: for each sample phase p (0/1) and each syncword symbol k of
// the set used, the differential product r[2k+p] * conj(r[2k-2+p]) is
// rotated by minus the known GMSK phase step of that symbol,
// pi/8*a(k-2) + pi/4*a(k-1) + pi/8*a(k), and accumulated. The phase whose sum
// has the larger magnitude (|re|+|im|) is chosen. The differential form does
// not depend on the carrier phase and only weakly on a residual CFO.
// Interface: start, then the samples of the header block at two per symbol
// (sample 2k+1 nominally the instant of symbol k, sample 2k midway). done
// pulses with phase and the two metrics after sample 2*KLAST+1.
// Paper vs design: the paper correlates over 20 of the 32 syncword symbols,
// positions {5..15, 18..26} (1-based), where the phase changes most; SYNC_SEL
// holds that set (bit p-1 for position p) and is the default. The
// differential correlation and the |re|+|im| metric are this design's
// choices. done comes after the last selected symbol (KLAST, 0-based symbol
// index in the block, default preamble + 26 - 1).
module symbol_timing_est
  import lrfhss_pkg::*;
#(
  parameter logic [SYNC_SYMS-1:0] SYNC_SEL = 32'h03FE_7FF0,
  parameter int KLAST  = PRE_SYMS + 26 - 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        in_valid,
  input  cplx_t       in_sample,
  output logic        done,
  output logic        phase,
  output logic [31:0] metric0,
  output logic [31:0] metric1
);
  cplx_t prev_q [2];
  logic signed [63:0] acc_i_q [2], acc_q_q [2];
  logic [7:0] n_q;
  logic       run_q;

  logic signed [31:0] k_now;
  logic p_now, sel_now;
  cplx_t dp, dr;
  always_comb begin
    k_now = int'(n_q[7:1]);
    p_now = n_q[0];
    sel_now = (k_now >= PRE_SYMS) && (k_now < PRE_SYMS + SYNC_SYMS) &&
              SYNC_SEL[5'(k_now - PRE_SYMS)];
    dp.i  = sat16((int'(in_sample.i) * int'(prev_q[p_now].i) + int'(in_sample.q) * int'(prev_q[p_now].q)) >>> 12);
    dp.q  = sat16((int'(in_sample.q) * int'(prev_q[p_now].i) - int'(in_sample.i) * int'(prev_q[p_now].q)) >>> 12);
    dr    = cplx_rot(dp, phase_t'(-kstep(n_q[7:1])));
  end

  function automatic logic [31:0] l1(input longint a, input longint b);
    longint s;
    s = (a < 0 ? -a : a) + (b < 0 ? -b : b);
    return 32'(s >>> 4);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q[0] <= '0; prev_q[1] <= '0; n_q <= '0; run_q <= 1'b0;
      for (int p = 0; p < 2; p++) begin acc_i_q[p] <= 0; acc_q_q[p] <= 0; end
      done <= 1'b0; phase <= 1'b0; metric0 <= '0; metric1 <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        n_q <= '0; run_q <= 1'b1;
        for (int p = 0; p < 2; p++) begin acc_i_q[p] <= 0; acc_q_q[p] <= 0; end
      end else if (in_valid && run_q) begin
        n_q <= n_q + 8'd1;
        prev_q[p_now] <= in_sample;
        if (sel_now) begin
          acc_i_q[p_now] <= acc_i_q[p_now] + longint'(dr.i);
          acc_q_q[p_now] <= acc_q_q[p_now] + longint'(dr.q);
        end
        if (n_q == 8'(2 * KLAST + 1)) begin
          run_q   <= 1'b0;
          done    <= 1'b1;
          metric0 <= l1(acc_i_q[0], acc_q_q[0]);
          metric1 <= l1(acc_i_q[1] + (sel_now ? longint'(dr.i) : 64'sd0), acc_q_q[1] + (sel_now ? longint'(dr.q) : 64'sd0));
          phase   <= l1(acc_i_q[1] + (sel_now ? longint'(dr.i) : 64'sd0), acc_q_q[1] + (sel_now ? longint'(dr.q) : 64'sd0)) >=
                     l1(acc_i_q[0], acc_q_q[0]);
        end
      end
    end
  end
endmodule
