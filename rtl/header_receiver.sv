// header_receiver: demodulates and decodes one detected header hopping block.
//
// Chain (as in the receiver figure): CFO correct -> LPF -> symbol timing
// estimation -> timing correct -> phase rotate -> CFO & phase estimation ->
// header SOVA -> deinterleaver -> Viterbi -> CRC8 -> header decoder.
// How it works:
//  1. start with the detector's CFO (freq, per sample). NIN = 229 samples of
//     the channel, beginning at the detected block position, are CFO
//     corrected and filtered; the 228 filtered samples centred on block
//     samples 0..227 are stored and also go to the symbol timing estimator.
//  2. The stored samples are replayed through timing correct (one sample
//     per symbol at the estimated phase), phase rotate, the CFO & phase
//     estimator (34 known symbols) and the header SOVA (11 Doppler
//     candidates, three best sequences kept).
//  3. For each kept sequence in order of score: its 80 coded soft bits are
//     deinterleaved; the Viterbi decoder runs the tail-biting rate-1/2 code
//     over the 40 steps twice, and the last 40 decisions (PHDR + CRC8) go to
//     the CRC and to the header decoder. The first sequence with a valid
//     header is taken.
// Interface: start/freq, then in_valid/in_sample while in_ready. done pulses
// at the end with hdr_ok, info/phdr, seq_used (which of the three sequences),
// best_cand (Doppler candidate of the best sequence), timing_phase and the
// estimates for the payload: pld_freq (total CFO per sample at the centre of
// the preamble and syncword, block sample 34) and pld_rate (Doppler rate per
// sample^2).
// Timing: about 229 + 228 + 3000 + 3 x 250 clocks per header.
// Paper vs design: the block order is the paper's. Trying the three SOVA
// sequences until a CRC passes, the buffering and the timing convention (a
// sample-phase-0 decision is taken to mean the block started one sample
// early) are this design's choices.
module header_receiver
  import lrfhss_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic signed [31:0] freq,
  input  logic signed [15:0] ua,
  input  logic signed [15:0] ub,
  input  logic signed [15:0] uc,
  input  logic               in_valid,
  input  cplx_t              in_sample,
  output logic               in_ready,
  output logic               done,
  output logic               hdr_ok,
  output payload_info_t      info,
  output phdr_t              phdr,
  output logic [1:0]         seq_used,
  output logic [3:0]         best_cand,
  output logic               timing_phase,
  output logic signed [31:0] pld_freq,
  output logic signed [31:0] pld_rate
);
  localparam int NS  = 2 * HDR_SYMS;   // 228 stored samples
  localparam int NIN = NS + 1;
  localparam int NKN = PRE_SYMS + SYNC_SYMS;

  typedef enum logic [3:0] {S_IDLE, S_IN, S_TSTART, S_REPLAY, S_SOVA, S_DSTART, S_DFEED,
                            S_VSTART, S_VFEED, S_VFLUSH, S_HCHK, S_HWAIT, S_FIN} st_e;
  st_e st_q;

  cplx_t sbuf_q [NS];
  llr_t  sllr_q [3][HDR_CODED];
  llr_t  dl_q [HDR_CODED];
  logic [8:0] n_q, m_q;   // 9-bit counters; buffer indices use their low 8 bits
  logic [6:0] j_q, t_q;
  logic [6:0] vo_q;
  logic [1:0] r_q;
  logic       fl_q;
  logic signed [31:0] freq_q;

  // ------------------------------------------------------------ front end
  logic cc_start, cc_ov, lp_ov;
  cplx_t cc_out, lp_out;
  assign cc_start = start;
  cfo_correct u_cfo (.clk, .rst_n, .start(cc_start), .freq0(freq), .rate(32'sd0),
    .in_valid(in_valid && in_ready), .in_sample, .out_valid(cc_ov), .out_sample(cc_out));
  lpf u_lpf (.clk, .rst_n, .start, .in_valid(cc_ov), .in_sample(cc_out),
    .out_valid(lp_ov), .out_sample(lp_out));

  logic ste_done, ste_phase;
  logic [31:0] ste_m0, ste_m1;
  symbol_timing_est u_ste (.clk, .rst_n, .start, .in_valid(lp_ov && m_q != 0), .in_sample(lp_out),
    .done(ste_done), .phase(ste_phase), .metric0(ste_m0), .metric1(ste_m1));

  // ------------------------------------------------------------ symbol domain
  logic tc_ov, tc_first, tc_last;
  logic [6:0] tc_idx;
  cplx_t tc_out;
  timing_correct #(.NSYM(HDR_SYMS)) u_tc (.clk, .rst_n, .start(st_q == S_TSTART), .phase(timing_phase),
    .skip(4'd0), .in_valid(st_q == S_REPLAY), .in_sample(sbuf_q[n_q[7:0]]),
    .out_valid(tc_ov), .out_first(tc_first), .out_last(tc_last), .out_idx(tc_idx), .out_sample(tc_out));

  logic pr_ov, pr_first;
  cplx_t pr_out;
  phase_rotate u_rot (.clk, .rst_n, .in_valid(tc_ov), .in_first(tc_first), .in_sample(tc_out),
    .out_valid(pr_ov), .out_first(pr_first), .out_sample(pr_out));

  logic cpe_done;
  ph32_t cpe_phi;
  logic signed [31:0] cpe_dphi;
  cfo_phase_est #(.NK(NKN), .TARGET(HDR_MID)) u_cpe (.clk, .rst_n, .start(st_q == S_TSTART),
    .in_valid(pr_ov), .in_sample(pr_out), .done(cpe_done), .phi_target(cpe_phi), .dphi(cpe_dphi));

  logic hs_ov, hs_done;
  logic [1:0] hs_seq;
  logic [6:0] hs_idx;
  llr_t hs_llr;
  logic [3:0] hs_best;
  logic [N_DR_CAND-1:0] hs_used;
  header_sova u_sova (.clk, .rst_n, .start(st_q == S_TSTART), .in_valid(pr_ov), .in_sample(pr_out),
    .phi_p_mid(cpe_phi), .phi_f(cpe_dphi), .ua, .ub, .uc,
    .out_valid(hs_ov), .out_seq(hs_seq), .out_idx(hs_idx), .out_llr(hs_llr), .done(hs_done),
    .best_cand(hs_best), .cand_used(hs_used));

  // ------------------------------------------------------------ decoding
  logic di_ov, di_last;
  llr_t di_llr;
  hdr_deinterleaver u_di (.clk, .rst_n, .start(st_q == S_DSTART), .in_valid(st_q == S_DFEED),
    .in_llr(sllr_q[r_q][j_q]), .out_valid(di_ov), .out_llr(di_llr), .out_last(di_last));

  llr_t vllr [3];
  logic v_flushing, v_ov, v_bit;
  always_comb begin
    logic [6:0] p;
    p = (t_q >= 7'(HDR_CODED / 2)) ? t_q - 7'(HDR_CODED / 2) : t_q;
    vllr[0] = dl_q[{p[5:0], 1'b0}];
    vllr[1] = dl_q[{p[5:0], 1'b1}];
    vllr[2] = '0;
  end
  viterbi_dec #(.SURV(40)) u_vit (.clk, .rst_n, .start(st_q == S_VSTART), .tail_biting(1'b1),
    .in_valid(st_q == S_VFEED), .llr(vllr), .flush(st_q == S_VFLUSH && !fl_q),
    .flushing(v_flushing), .out_valid(v_ov), .out_bit(v_bit));

  logic hbit_v;
  assign hbit_v = v_ov && (vo_q >= 7'(HDR_CODED / 2));
  logic [7:0] crc8;
  logic crc_zero;
  crc8_unit u_crc (.clk, .rst_n, .start(st_q == S_VSTART), .bit_valid(hbit_v), .bit_in(v_bit),
    .crc(crc8), .crc_zero(crc_zero));

  logic hd_valid, hd_err;
  payload_info_t hd_info;
  phdr_t hd_phdr;
  header_decoder u_hdec (.clk, .rst_n, .start(st_q == S_VSTART), .bit_valid(hbit_v), .bit_in(v_bit),
    .done(st_q == S_HCHK), .crc_zero, .info(hd_info), .phdr(hd_phdr), .info_valid(hd_valid),
    .hdr_error(hd_err));

  assign in_ready = (st_q == S_IN) && (n_q != 9'(NIN));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; n_q <= '0; m_q <= '0; j_q <= '0; t_q <= '0; vo_q <= '0; r_q <= '0; fl_q <= 1'b0;
      freq_q <= '0; done <= 1'b0; hdr_ok <= 1'b0; info <= '0; phdr <= '0; seq_used <= '0;
      best_cand <= '0; timing_phase <= 1'b1; pld_freq <= '0; pld_rate <= '0;
    end else begin
      done <= 1'b0;
      if (lp_ov) begin
        m_q <= m_q + 9'd1;
        if (m_q != 0) sbuf_q[8'(m_q - 9'd1)] <= lp_out;
      end
      if (ste_done) timing_phase <= ste_phase;
      if (hs_ov && hs_idx >= 7'(NKN)) sllr_q[hs_seq][hs_idx - 7'(NKN)] <= hs_llr;
      if (di_ov && st_q == S_VSTART) begin dl_q[j_q] <= di_llr; j_q <= j_q + 7'd1; end
      if (v_ov) vo_q <= vo_q + 7'd1;
      if (start) begin
        st_q <= S_IN; n_q <= '0; m_q <= '0; freq_q <= freq; hdr_ok <= 1'b0;
      end else begin
        unique case (st_q)
          S_IDLE: ;
          S_IN: begin
            if (in_valid && in_ready) n_q <= n_q + 9'd1;
            if (lp_ov && m_q == 9'(NS)) st_q <= S_TSTART;
          end
          S_TSTART: begin st_q <= S_REPLAY; n_q <= '0; end
          S_REPLAY: begin
            if (n_q == 9'(NS - 1)) st_q <= S_SOVA;
            else n_q <= n_q + 9'd1;
          end
          S_SOVA: if (hs_done) begin
            st_q <= S_DSTART; r_q <= '0;
            best_cand <= hs_best;
            // per-symbol quantities to per-sample (two samples per symbol)
            pld_freq <= freq_q + (cpe_dphi >>> 1);
            pld_rate <= (32'(int'(hs_best) - 5) * DR_STEP) >>> 2;
          end
          S_DSTART: begin st_q <= S_DFEED; j_q <= '0; end
          S_DFEED: begin
            if (j_q == 7'(HDR_CODED - 1)) begin st_q <= S_VSTART; j_q <= '0; end
            else j_q <= j_q + 7'd1;
          end
          S_VSTART: begin
            // wait for the last deinterleaved soft bit
            if (di_last) begin st_q <= S_VFEED; t_q <= '0; vo_q <= '0; end
          end
          S_VFEED: begin
            if (t_q == 7'(HDR_CODED - 1)) begin st_q <= S_VFLUSH; fl_q <= 1'b0; end
            else t_q <= t_q + 7'd1;
          end
          S_VFLUSH: begin
            fl_q <= 1'b1;
            if (vo_q == 7'(HDR_CODED)) st_q <= S_HCHK;
          end
          S_HCHK: st_q <= S_HWAIT;
          S_HWAIT: begin
            if (hd_valid) begin
              st_q <= S_FIN; hdr_ok <= 1'b1; info <= hd_info; phdr <= hd_phdr; seq_used <= r_q;
            end else if (hd_err) begin
              if (r_q == 2'd2) st_q <= S_FIN;
              else begin r_q <= r_q + 2'd1; st_q <= S_DSTART; end
            end
          end
          S_FIN: begin done <= 1'b1; st_q <= S_IDLE; end
          default: st_q <= S_IDLE;
        endcase
      end
    end
  end
endmodule
