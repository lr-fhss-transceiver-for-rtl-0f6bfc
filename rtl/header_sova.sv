// header_sova: enhanced header SOVA. Runs the 4-state SOVA core over one
// 114-symbol header block forward and backward from the middle for each of
// the 11 Doppler-rate candidates and keeps the three best soft-bit sequences.
//
// The phase-rotated symbol samples of the block are first stored (in_valid /
// in_sample, 114 of them after start). For candidate c (rate (c-5)*80 Hz/s,
// i.e. 0, +/-80 ... +/-400 Hz/s) the core runs
//   forward  over symbols 57..113 (the paper's [58:114]) starting from the
//            channel phase phi_p_mid of symbol 57, CFO phi_f and rate +cand;
//   backward over the complex conjugates of symbols 57 down to 0, which form
//            a forward GMSK signal of the time-reversed symbols delayed by one
//            symbol, starting from -phi_p_mid, CFO phi_f and rate -cand; its
//            m-th decision is symbol 56-m (the paper's [1:57]).
// The soft bits of both halves are stored per candidate and the candidate's
// score is the sum of the two final best path metrics. After all 22 runs the
// three best-scoring candidates are sent out one after another, each as 114
// soft bits (out_valid, out_seq 0..2 best first, out_idx, out_llr); done then
// pulses and best_cand gives the winning candidate index. One block takes
// about 2200 cycles.
// The forward/backward split at the middle, the 11 candidates and the choice
// of three sequences are the paper's. Running the backward search on the
// conjugated, reversed samples, and ranking by path metric alone (the paper
// also mentions judging candidates by BER after demodulation), are this
// design's choices.
module header_sova
  import lrfhss_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               in_valid,
  input  cplx_t              in_sample,
  input  ph32_t              phi_p_mid,
  input  logic signed [31:0] phi_f,
  input  logic signed [15:0] ua,
  input  logic signed [15:0] ub,
  input  logic signed [15:0] uc,
  output logic               out_valid,
  output logic [1:0]         out_seq,
  output logic [6:0]         out_idx,
  output llr_t               out_llr,
  output logic               done,
  output logic [3:0]         best_cand,
  output logic [N_DR_CAND-1:0] cand_used
);
  typedef enum logic [3:0] {S_IDLE, S_LOAD, S_FSTART, S_FFEED, S_FFLUSH, S_BSTART, S_BFEED,
                            S_BFLUSH, S_RANK, S_OUT, S_DONE} state_e;
  state_e st_q;

  cplx_t  buf_q [HDR_SYMS];
  llr_t   soft_q [N_DR_CAND][HDR_SYMS];
  logic signed [31:0] score_q [N_DR_CAND];
  logic signed [31:0] fwd_pm_q;
  logic [6:0] k_q, oc_q;
  logic [3:0] c_q;
  logic [1:0] r_q;
  logic [3:0] rank_q [3];
  logic [N_DR_CAND-1:0] taken_q;
  logic fl_seen_q;

  // core interface
  logic core_start, core_in_valid, core_flush, core_flushing, core_out_valid, core_out_bit;
  ph32_t core_php;
  logic signed [31:0] core_phf, core_phdr, core_best;
  cplx_t core_in;
  llr_t  core_llr;

  logic signed [31:0] cand_rate;
  assign cand_rate = 32'((int'(c_q) - 5) * DR_STEP);

  sova_core u_core (
    .clk, .rst_n, .start(core_start), .phi_p0(core_php), .phi_f0(core_phf), .phi_dr0(core_phdr),
    .ua, .ub, .uc, .in_valid(core_in_valid), .in_sample(core_in), .flush(core_flush),
    .flushing(core_flushing), .out_valid(core_out_valid), .out_llr(core_llr),
    .out_bit(core_out_bit), .best_pm(core_best));

  // The phase and CFO inputs are linear extrapolations from the centre of the
  // known part (symbol 16.5, D = 40.5 symbols before the middle); for a
  // candidate rate r the quadratic term adds r*D^2/2 to the phase and r*D to
  // the CFO.
  ph32_t              phi_mid_c;
  logic signed [31:0] phi_f_c;
  assign phi_mid_c = phi_p_mid + ph32_t'((longint'(cand_rate) * 64'sd1640) >>> 1);
  assign phi_f_c   = phi_f + 32'((longint'(cand_rate) * 64'sd81) >>> 1);

  always_comb begin
    core_start    = (st_q == S_FSTART) || (st_q == S_BSTART);
    core_php      = (st_q == S_BSTART) ? ph32_t'(-phi_mid_c) : phi_mid_c;
    core_phf      = phi_f_c;
    core_phdr     = (st_q == S_BSTART) ? -cand_rate : cand_rate;
    core_in_valid = (st_q == S_FFEED) || (st_q == S_BFEED);
    core_in       = (st_q == S_BFEED) ? cplx_conj(buf_q[k_q]) : buf_q[k_q];
    core_flush    = ((st_q == S_FFLUSH) || (st_q == S_BFLUSH)) && !fl_seen_q;
  end

  // best not-yet-taken candidate
  logic [3:0] arg;
  always_comb begin
    logic found;
    arg = 4'd0; found = 1'b0;
    for (int c = 0; c < N_DR_CAND; c++)
      if (!taken_q[c] && (!found || $signed(score_q[c] - score_q[arg]) > 0)) begin
        arg = 4'(c); found = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; k_q <= '0; oc_q <= '0; c_q <= '0; r_q <= '0; taken_q <= '0;
      fwd_pm_q <= '0; fl_seen_q <= 1'b0;
      out_valid <= 1'b0; out_seq <= '0; out_idx <= '0; out_llr <= '0; done <= 1'b0;
      best_cand <= '0; cand_used <= '0;
      for (int c = 0; c < N_DR_CAND; c++) score_q[c] <= '0;
      for (int i = 0; i < 3; i++) rank_q[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      // capture core outputs
      if (core_out_valid) begin
        if (st_q == S_FFLUSH || st_q == S_FFEED)
          soft_q[c_q][7'(HDR_MID) + oc_q] <= core_llr;
        else if (oc_q <= 7'(HDR_MID - 1))
          soft_q[c_q][7'(HDR_MID - 1) - oc_q] <= core_llr;
        oc_q <= oc_q + 7'd1;
      end
      if (start) begin
        st_q <= S_LOAD; k_q <= '0;
      end else begin
        unique case (st_q)
          S_IDLE: ;
          S_LOAD: if (in_valid) begin
            buf_q[k_q] <= in_sample;
            if (k_q == 7'(HDR_SYMS - 1)) begin st_q <= S_FSTART; c_q <= '0; end
            else k_q <= k_q + 7'd1;
          end
          S_FSTART: begin st_q <= S_FFEED; k_q <= 7'(HDR_MID); oc_q <= '0; end
          S_FFEED: begin
            if (k_q == 7'(HDR_SYMS - 1)) begin st_q <= S_FFLUSH; fl_seen_q <= 1'b0; end
            else k_q <= k_q + 7'd1;
          end
          S_FFLUSH: begin
            if (core_flush) begin fwd_pm_q <= core_best; fl_seen_q <= 1'b1; end
            if (fl_seen_q && !core_flushing) begin
              st_q <= S_BSTART;
            end
          end
          S_BSTART: begin st_q <= S_BFEED; k_q <= 7'(HDR_MID); oc_q <= '0; end
          S_BFEED: begin
            if (k_q == 7'd0) begin st_q <= S_BFLUSH; fl_seen_q <= 1'b0; end
            else k_q <= k_q - 7'd1;
          end
          S_BFLUSH: begin
            if (core_flush) begin
              score_q[c_q] <= fwd_pm_q + core_best; fl_seen_q <= 1'b1;
            end
            if (fl_seen_q && !core_flushing) begin
              if (c_q == 4'(N_DR_CAND - 1)) begin st_q <= S_RANK; r_q <= '0; taken_q <= '0; end
              else begin c_q <= c_q + 4'd1; st_q <= S_FSTART; end
            end
          end
          S_RANK: begin
            rank_q[r_q]  <= arg;
            taken_q[arg] <= 1'b1;
            if (r_q == 2'd2) begin st_q <= S_OUT; r_q <= '0; k_q <= '0; end
            else r_q <= r_q + 2'd1;
          end
          S_OUT: begin
            out_valid <= 1'b1;
            out_seq   <= r_q;
            out_idx   <= k_q;
            out_llr   <= soft_q[rank_q[r_q]][k_q];
            if (k_q == 7'(HDR_SYMS - 1)) begin
              k_q <= '0;
              if (r_q == 2'd2) st_q <= S_DONE;
              else r_q <= r_q + 2'd1;
            end else k_q <= k_q + 7'd1;
          end
          S_DONE: begin
            done <= 1'b1; best_cand <= rank_q[0]; cand_used <= taken_q; st_q <= S_IDLE;
          end
          default: st_q <= S_IDLE;
        endcase
      end
    end
  end
endmodule
