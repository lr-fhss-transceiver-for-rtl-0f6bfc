// payload_receiver: demodulates the payload hopping blocks of one packet and
// decodes the payload.
//
// Chain (as in the receiver figure): Doppler & CFO correct -> LPF -> timing
// correct -> phase rotate -> CFO & phase estimation -> payload SOVA ->
// deinterleaver -> Viterbi -> CRC16 -> dewhitener.
// How it works: start takes the header results (payload info, CFO and
// Doppler rate at the header middle, timing phase). For each of the n_frag
// blocks, blk_start gives blk_offset, the number of samples from the header's
// estimation point (its sample 34) to the block's first sample; the block's CFO is then
// freq + rate * blk_offset and the correction NCO keeps applying the rate.
// 101 samples per block are corrected and filtered, the 100 centred on
// block samples 0..99 are decimated to 50 symbols, rotated, the phase at
// symbol 0 is estimated from the two preamble symbols and the payload SOVA
// produces 48 soft bits. After the last block, the deinterleaver reorders
// all n_frag*48 soft bits, the depuncturer restores the rate-1/3 positions,
// and the Viterbi decoder (zero-tailed) produces 8*(L+2) bits: L whitened
// payload bytes, which go to the dewhitener, and the 16-bit CRC, checked
// over the whitened payload.
// Interface: start/info/freq/rate/phase; per block blk_start/blk_offset and
// in_valid/in_sample while in_ready; byte_valid/out_byte for each payload
// byte; done with crc_ok at the end.
// Paper vs design: the block order is the paper's; the block-offset based
// Doppler extrapolation, the single forward SOVA pass and the buffering are
// this design's choices.
module payload_receiver
  import lrfhss_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  payload_info_t      info,
  input  logic signed [31:0] freq,
  input  logic signed [31:0] rate,
  input  logic               phase,
  input  logic signed [15:0] ua,
  input  logic signed [15:0] ub,
  input  logic signed [15:0] uc,
  input  logic               blk_start,
  input  logic signed [31:0] blk_offset,
  input  logic               in_valid,
  input  cplx_t              in_sample,
  output logic               in_ready,
  output logic               blk_done,
  output logic               byte_valid,
  output logic [7:0]         out_byte,
  output logic               done,
  output logic               crc_ok
);
  localparam int NS  = 2 * PLD_SYMS;   // 100
  localparam int NIN = NS + 1;

  typedef enum logic [2:0] {S_IDLE, S_WAITB, S_BLK, S_SOVA, S_DEC, S_FLUSH, S_FIN} st_e;
  st_e st_q;

  payload_info_t info_q;
  logic signed [31:0] freq_q, rate_q;
  logic               ph_q;
  logic [6:0]  n_q, m_q;
  logic [5:0]  f_q;
  logic [11:0] vin_q, vout_q, nb_q;
  logic        fl_q;

  // ------------------------------------------------------------ per block
  logic signed [31:0] f0;
  assign f0 = freq_q + 32'(longint'(rate_q) * longint'(blk_offset));
  logic cc_ov, lp_ov;
  cplx_t cc_out, lp_out;
  cfo_correct u_cfo (.clk, .rst_n, .start(blk_start), .freq0(f0), .rate(rate_q),
    .in_valid(in_valid && in_ready), .in_sample, .out_valid(cc_ov), .out_sample(cc_out));
  lpf u_lpf (.clk, .rst_n, .start(blk_start), .in_valid(cc_ov), .in_sample(cc_out),
    .out_valid(lp_ov), .out_sample(lp_out));

  logic tc_ov, tc_first, tc_last;
  logic [6:0] tc_idx;
  cplx_t tc_out;
  timing_correct #(.NSYM(PLD_SYMS)) u_tc (.clk, .rst_n, .start(blk_start), .phase(ph_q),
    .skip(4'd0), .in_valid(lp_ov && m_q != 0), .in_sample(lp_out),
    .out_valid(tc_ov), .out_first(tc_first), .out_last(tc_last), .out_idx(tc_idx), .out_sample(tc_out));

  logic pr_ov, pr_first;
  cplx_t pr_out;
  phase_rotate u_rot (.clk, .rst_n, .in_valid(tc_ov), .in_first(tc_first), .in_sample(tc_out),
    .out_valid(pr_ov), .out_first(pr_first), .out_sample(pr_out));

  logic cpe_done;
  ph32_t cpe_phi;
  logic signed [31:0] cpe_dphi;
  cfo_phase_est #(.NK(PRE_SYMS), .TARGET(0)) u_cpe (.clk, .rst_n, .start(blk_start),
    .in_valid(pr_ov), .in_sample(pr_out), .done(cpe_done), .phi_target(cpe_phi), .dphi(cpe_dphi));

  logic ps_ov, ps_done;
  llr_t ps_llr;
  payload_sova u_sova (.clk, .rst_n, .start(blk_start), .in_valid(pr_ov), .in_sample(pr_out),
    .phi_p0(cpe_phi), .phi_f(32'sd0), .ua, .ub, .uc, .out_valid(ps_ov), .out_llr(ps_llr), .done(ps_done));

  // ------------------------------------------------------------ per packet
  logic di_ov, di_last;
  llr_t di_llr;
  pld_deinterleaver u_di (.clk, .rst_n, .start, .n_frag(info.n_frag), .in_valid(ps_ov), .in_llr(ps_llr),
    .out_valid(di_ov), .out_llr(di_llr), .out_last(di_last));

  logic dp_ov;
  llr_t dp_llr [3];
  depuncture u_dp (.clk, .rst_n, .start, .cr(info.cr), .in_valid(di_ov), .in_llr(di_llr),
    .out_valid(dp_ov), .out_llr(dp_llr));

  logic v_flushing, v_ov, v_bit;
  viterbi_dec #(.SURV(40)) u_vit (.clk, .rst_n, .start, .tail_biting(1'b0),
    .in_valid(dp_ov && vin_q < nb_q), .llr(dp_llr), .flush(st_q == S_FLUSH && !fl_q),
    .flushing(v_flushing), .out_valid(v_ov), .out_bit(v_bit));

  // decoded bit vout_q: payload bits first, then the 16 CRC bits, then the tail
  logic data_bit, par_bit;
  assign data_bit = v_ov && (vout_q < 12'({info_q.length, 3'b000}));
  assign par_bit  = v_ov && !data_bit && (vout_q < 12'({info_q.length, 3'b000}) + 12'd16);
  logic [15:0] crc_v, crc_par;
  crc16_unit u_crc (.clk, .rst_n, .start, .bit_valid(data_bit || par_bit), .bit_in(v_bit),
    .is_parity(par_bit), .crc(crc_v), .rx_parity(crc_par), .crc_ok(crc_ok));

  logic dw_ov, dw_bit;
  dewhitener u_dw (.clk, .rst_n, .start, .in_valid(data_bit), .in_bit(v_bit),
    .out_valid(dw_ov), .out_bit(dw_bit), .byte_valid(byte_valid), .out_byte(out_byte));

  assign in_ready = (st_q == S_BLK) && (n_q != 7'(NIN));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; info_q <= '0; freq_q <= '0; rate_q <= '0; ph_q <= 1'b1;
      n_q <= '0; m_q <= '0; f_q <= '0; vin_q <= '0; vout_q <= '0; nb_q <= '0; fl_q <= 1'b0;
      blk_done <= 1'b0; done <= 1'b0;
    end else begin
      blk_done <= 1'b0;
      done     <= 1'b0;
      if (lp_ov) m_q <= m_q + 7'd1;
      if (dp_ov && vin_q < nb_q) vin_q <= vin_q + 12'd1;
      if (v_ov) vout_q <= vout_q + 12'd1;
      if (start) begin
        st_q <= S_WAITB; info_q <= info; freq_q <= freq; rate_q <= rate; ph_q <= phase;
        f_q <= '0; vin_q <= '0; vout_q <= '0;
        nb_q <= 12'({info.length, 3'b000}) + 12'd16 + 12'(CONV_TAIL);
      end else begin
        unique case (st_q)
          S_IDLE: ;
          S_WAITB: if (blk_start) begin st_q <= S_BLK; n_q <= '0; m_q <= '0; end
          S_BLK: begin
            if (in_valid && in_ready) n_q <= n_q + 7'd1;
            if (ps_done) begin
              blk_done <= 1'b1;
              if (f_q == info_q.n_frag - 6'd1) st_q <= S_DEC;
              else begin f_q <= f_q + 6'd1; st_q <= S_WAITB; end
            end
          end
          S_DEC: if (vin_q == nb_q) begin st_q <= S_FLUSH; fl_q <= 1'b0; end
          S_FLUSH: begin
            fl_q <= 1'b1;
            if (vout_q == nb_q) st_q <= S_FIN;
          end
          S_FIN: begin done <= 1'b1; st_q <= S_IDLE; end
          default: st_q <= S_IDLE;
        endcase
      end
    end
  end
endmodule
