// viterbi_dec: 64-state soft-input Viterbi decoder for the rate-1/3 mother
// code (punctured positions enter as zero soft bits, see depuncture).
//
// Each accepted step (in_valid) carries three soft bits llr[0..2] for the coded
// bits c0..c2 of one information bit (positive = 1). Every state s has two
// predecessors s0 = {0, s[5:1]} and s1 = {1, s[5:1]}; the add-compare-select
// forms m0 = pm[s0] + bm0 and m1 = pm[s1] + bm1, where a branch metric adds
// +llr for a coded 1 and -llr for a coded 0, keeps m0 when m0 >= m1 and appends
// the information bit s[0] to the survival path register copied from the chosen
// predecessor (register exchange, SURV bits per state). Path metrics are 32-bit
// and compared modulo 2^32, so they never need renormalising.
// Output: once SURV steps are held, each further step first emits the oldest
// bit of the state with the largest path metric; flush then emits the bits
// still held, oldest first, one per cycle (flushing stays high until done).
// Every information bit comes out exactly once, in order, on out_valid/out_bit.
// start resets the metrics: all states equal for the tail-biting header (the
// header's 40 steps are fed twice, and the last 40 outputs are the header),
// only state 0 for a zero-tailed payload (tail_biting low).
// Structure per state and the largest-metric output follow the paper; the
// survival depth SURV, metric width and the two-pass header schedule are this
// design's choices.
module viterbi_dec
  import lrfhss_pkg::*;
#(
  parameter int SURV = 40
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       tail_biting,
  input  logic       in_valid,
  input  llr_t       llr [3],
  input  logic       flush,
  output logic       flushing,
  output logic       out_valid,
  output logic       out_bit
);
  localparam int NS = 64;
  localparam int CW = $clog2(SURV + 1);

  logic signed [31:0] pm_q [NS];
  logic [SURV-1:0]    sv_q [NS];
  logic signed [31:0] pm_n [NS];
  logic [SURV-1:0]    sv_n [NS];
  logic [CW-1:0]      cnt_q;       // steps held in the survivors (saturates at SURV)
  logic [CW-1:0]      fl_q;        // bits still to flush
  logic               fl_act_q;
  logic [5:0]         best;

  function automatic logic signed [31:0] bmetric(input logic [2:0] c, input llr_t l [3]);
    logic signed [31:0] acc;
    acc = 0;
    for (int j = 0; j < 3; j++) acc += c[j] ? 32'(l[j]) : -32'(l[j]);
    return acc;
  endfunction

  // add-compare-select for all states
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      logic [6:0] w0, w1;
      logic [2:0] c0, c1;
      logic signed [31:0] m0, m1;
      logic [5:0] s0, s1;
      s0 = {1'b0, 5'(s >> 1)};
      s1 = {1'b1, 5'(s >> 1)};
      w0 = {s[0], s0[0], s0[1], s0[2], s0[3], s0[4], s0[5]};
      w1 = {s[0], s1[0], s1[1], s1[2], s1[3], s1[4], s1[5]};
      c0 = {^(w0 & CONV_G2), ^(w0 & CONV_G1), ^(w0 & CONV_G0)};
      c1 = {^(w1 & CONV_G2), ^(w1 & CONV_G1), ^(w1 & CONV_G0)};
      m0 = pm_q[s0] + bmetric(c0, llr);
      m1 = pm_q[s1] + bmetric(c1, llr);
      if ($signed(m0 - m1) >= 0) begin
        pm_n[s] = m0; sv_n[s] = {sv_q[s0][SURV-2:0], s[0]};
      end else begin
        pm_n[s] = m1; sv_n[s] = {sv_q[s1][SURV-2:0], s[0]};
      end
    end
  end

  // state with the largest path metric
  always_comb begin
    best = 6'd0;
    for (int s = 1; s < NS; s++)
      if ($signed(pm_q[s] - pm_q[best]) > 0) best = 6'(s);
  end

  assign flushing = fl_act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NS; s++) begin pm_q[s] <= '0; sv_q[s] <= '0; end
      cnt_q <= '0; fl_q <= '0; fl_act_q <= 1'b0; out_valid <= 1'b0; out_bit <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        for (int s = 0; s < NS; s++) begin
          pm_q[s] <= (tail_biting || s == 0) ? 32'sd0 : -32'sd1048576;
          sv_q[s] <= '0;
        end
        cnt_q <= '0; fl_act_q <= 1'b0;
      end else if (fl_act_q) begin
        if (fl_q != '0) begin
          out_valid <= 1'b1;
          out_bit   <= sv_q[best][fl_q - 1'b1];
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
          out_bit   <= sv_q[best][SURV-1];
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
        pm_q <= pm_n;
        sv_q <= sv_n;
      end
    end
  end
endmodule
