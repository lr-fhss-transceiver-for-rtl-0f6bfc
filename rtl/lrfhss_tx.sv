// lrfhss_tx: LR-FHSS transmitter encoder. Builds the complete sequence of
// hopping blocks (N_H header replicas, then the payload blocks) of one packet
// and sends it symbol by symbol.
//
// How it works, in order:
//  1. Payload bytes (byte_valid/byte_in, L = length of them) are whitened
//     bit by bit (MSB first) by the whitening LFSR; the whitened bits are
//     stored and fed to the CRC16, whose 16 bits are appended, followed by 6
//     zero tail bits: 8L + 22 bits.
//  2. For header replica h = 0..n_hdr-1 the 32-bit PHDR (length, modulation
//     0, coding rate, hopping on, hop_seq, h) gets its CRC8; the 40 bits are
//     encoded tail-biting at rate 1/2 (encoder preloaded with the last six
//     bits), interleaved, and framed with the preamble and syncword into a
//     114-symbol block.
//  3. The payload bits are encoded at the PHDR coding rate, interleaved over
//     n_frag = ceil(coded/48) blocks and framed into n_frag 50-symbol blocks.
//  4. Every sym_req then yields the next symbol on sym_valid/sym_bit with
//     sym_first at each block start, sym_hdr for header blocks and sym_blk the
//     block number (the hopping controller uses these to change channel).
// Interface: start with length, cr, hop_seq and n_hdr (1..4); bytes with
// byte_valid/byte_ready; busy while building or sending; done after the last
// symbol. n_frag is an output.
// Paper vs design: the transmit chain (CRC, encoding, interleaving,
// fragmentation, syncword and preamble insertion) and the block formats are
// the paper's; the code polynomials, CRC polynomials, whitening, PHDR layout
// and buffering are this design's choices.
module lrfhss_tx
  import lrfhss_pkg::*;
#(
  parameter int MAX_LEN = 255
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] length,
  input  code_rate_e cr,
  input  logic [8:0] hop_seq,
  input  logic [2:0] n_hdr,
  input  logic       byte_valid,
  input  logic [7:0] byte_in,
  output logic       byte_ready,
  output logic [5:0] n_frag,
  input  logic       sym_req,
  output logic       sym_valid,
  output logic       sym_bit,
  output logic       sym_first,
  output logic       sym_hdr,
  output logic [6:0] sym_blk,
  output logic       busy,
  output logic       done
);
  localparam int PB = 8 * MAX_LEN + 16 + CONV_TAIL;
  localparam int CB = MAX_FRAGS * FRAG_BITS;
  localparam int FB = 4 * HDR_SYMS + MAX_FRAGS * PLD_SYMS;

  typedef enum logic [3:0] {T_IDLE, T_PBYTES, T_PWAIT, T_PCRC, T_HCRC, T_HWAIT, T_HSTART, T_PSTART,
                            T_ENC, T_DRAIN, T_IL, T_FRAME, T_FWAIT, T_SEND, T_DONE} st_e;
  st_e st_q;

  logic [PB-1:0] pbuf_q;
  logic [CB-1:0] cbuf_q;
  logic [FB-1:0] fbuf_q;
  logic [11:0] pw_q, pr_q, cw_q, cx_q, fw_q, fr_q, nb_q;
  logic [7:0]  byte_q, nbyte_q;
  logic [3:0]  bi_q;
  logic [2:0]  h_q;
  logic [5:0]  f_q;
  logic        hdr_mode_q;
  logic [39:0] hbits_q;
  logic [5:0]  hc_q;
  logic [7:0]  len_q;
  code_rate_e  cr_q;
  logic [8:0]  hop_q;
  logic [2:0]  nh_q;
  logic [7:0]  bcnt_q;   // symbols left in the current block while sending

  phdr_t ph;
  always_comb begin
    ph = '0;
    ph.length = len_q; ph.modulation = 3'd0; ph.cr = cr_q; ph.grid = 1'b0; ph.hopping = 1'b1;
    ph.bw = 4'd0; ph.hop_seq = hop_q; ph.hdr_idx = h_q[1:0]; ph.rsvd = 2'b00;
  end

  // ------------------------------------------------------------ whitening + CRC16
  logic wh_in_v, wh_ov, wh_bit, wh_bv;
  logic [7:0] wh_byte;
  assign wh_in_v = (st_q == T_PBYTES) && bi_q != 0;
  dewhitener u_wh (.clk, .rst_n, .start, .in_valid(wh_in_v), .in_bit(byte_q[3'(bi_q - 4'd1)]),
    .out_valid(wh_ov), .out_bit(wh_bit), .byte_valid(wh_bv), .out_byte(wh_byte));
  logic [15:0] crc16, crc16_par;
  logic crc16_ok;
  crc16_unit u_crc16 (.clk, .rst_n, .start, .bit_valid(wh_ov), .bit_in(wh_bit), .is_parity(1'b0),
    .crc(crc16), .rx_parity(crc16_par), .crc_ok(crc16_ok));

  // ------------------------------------------------------------ CRC8
  logic [7:0] crc8;
  logic crc8_zero;
  crc8_unit u_crc8 (.clk, .rst_n, .start(st_q == T_PCRC || st_q == T_FWAIT), .bit_valid(st_q == T_HCRC),
    .bit_in(ph[5'(31 - int'(hc_q))]), .crc(crc8), .crc_zero(crc8_zero));

  // ------------------------------------------------------------ encoder + interleaver
  logic enc_ready, enc_cv, enc_cb, enc_in_v, enc_in_b;
  logic enc_go;
  logic [11:0] enc_n;
  assign enc_n    = hdr_mode_q ? 12'(HDR_BITS) : nb_q;
  assign enc_in_v = (st_q == T_ENC) && (pr_q < enc_n);
  assign enc_in_b = hdr_mode_q ? hbits_q[6'(39 - int'(pr_q))] : pbuf_q[pr_q];
  conv_encoder u_enc (.clk, .rst_n, .start(enc_go), .cr(hdr_mode_q ? CR_1_2 : cr_q),
    .init_state(hdr_mode_q ? hbits_q[5:0] : 6'd0), .in_valid(enc_in_v), .in_bit(enc_in_b),
    .in_ready(enc_ready), .code_valid(enc_cv), .code_bit(enc_cb));

  logic il_ov, il_bit, il_last;
  interleaver u_il (.clk, .rst_n, .start(enc_go), .hdr(hdr_mode_q), .n_frag,
    .in_valid(enc_cv), .in_bit(enc_cb), .in_done(st_q == T_DRAIN && enc_ready && !enc_cv),
    .out_valid(il_ov), .out_bit(il_bit), .out_last(il_last));

  // ------------------------------------------------------------ framer
  logic fr_start, fr_ready, fr_sv, fr_sb, fr_first, fr_last, fr_busy;
  tx_framer u_fr (.clk, .rst_n, .blk_start(fr_start), .blk_hdr(hdr_mode_q), .in_valid(1'b1),
    .in_bit(cbuf_q[cx_q]), .in_ready(fr_ready), .sym_valid(fr_sv), .sym_bit(fr_sb),
    .sym_first(fr_first), .sym_last(fr_last), .busy(fr_busy));

  assign byte_ready = (st_q == T_PBYTES) && bi_q == 0 && nbyte_q != len_q;
  assign enc_go     = (st_q == T_HSTART) || (st_q == T_PSTART);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= T_IDLE; pw_q <= '0; pr_q <= '0; cw_q <= '0; cx_q <= '0; fw_q <= '0; fr_q <= '0; nb_q <= '0;
      byte_q <= '0; nbyte_q <= '0; bi_q <= '0; h_q <= '0; f_q <= '0; hdr_mode_q <= 1'b1; hbits_q <= '0;
      hc_q <= '0; len_q <= '0; cr_q <= CR_1_3; hop_q <= '0; nh_q <= 3'd1; bcnt_q <= '0; n_frag <= '0;
      fr_start <= 1'b0; sym_valid <= 1'b0; sym_bit <= 1'b0; sym_first <= 1'b0; sym_hdr <= 1'b0;
      sym_blk <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      fr_start  <= 1'b0;
      sym_valid <= 1'b0;
      sym_first <= 1'b0;
      done      <= 1'b0;
      if (wh_ov) begin pbuf_q[pw_q] <= wh_bit; pw_q <= pw_q + 12'd1; end
      if (il_ov) begin cbuf_q[cw_q] <= il_bit; cw_q <= cw_q + 12'd1; end
      if (fr_sv) begin fbuf_q[fw_q] <= fr_sb; fw_q <= fw_q + 12'd1; end
      if (fr_ready) cx_q <= cx_q + 12'd1;
      if (st_q == T_ENC && enc_in_v && enc_ready) pr_q <= pr_q + 12'd1;
      unique case (st_q)
        T_IDLE: if (start) begin
          st_q <= T_PBYTES; busy <= 1'b1; len_q <= length; cr_q <= cr; hop_q <= hop_seq;
          nh_q <= (n_hdr == 0) ? 3'd1 : (n_hdr > 3'd4 ? 3'd4 : n_hdr);
          n_frag <= 6'(n_payload_frags(cr, int'(length)));
          nb_q <= 12'({length, 3'b000}) + 12'd16 + 12'(CONV_TAIL);
          pw_q <= '0; nbyte_q <= '0; bi_q <= '0; fw_q <= '0; h_q <= '0; f_q <= '0; hdr_mode_q <= 1'b1;
        end
        T_PBYTES: begin
          if (bi_q != 0) bi_q <= bi_q - 4'd1;
          else if (nbyte_q == len_q) st_q <= T_PWAIT;
          else if (byte_valid) begin byte_q <= byte_in; bi_q <= 4'd8; nbyte_q <= nbyte_q + 8'd1; end
        end
        T_PWAIT: if (!wh_ov) st_q <= T_PCRC;          // last whitened bit and CRC update done
        T_PCRC: begin
          // append CRC16 (MSB first) and the zero tail, then start the first header
          for (int i = 0; i < 16; i++) pbuf_q[pw_q + 12'(i)] <= crc16[15 - i];
          for (int i = 16; i < 16 + CONV_TAIL; i++) pbuf_q[pw_q + 12'(i)] <= 1'b0;
          st_q <= T_HCRC; hc_q <= '0;
        end
        T_HCRC: begin
          hc_q <= hc_q + 6'd1;
          if (hc_q == 6'd31) st_q <= T_HWAIT;
        end
        T_HWAIT: begin hbits_q <= {ph, crc8}; st_q <= T_HSTART; end
        T_HSTART, T_PSTART: begin st_q <= T_ENC; pr_q <= '0; cw_q <= '0; end
        T_ENC: if (pr_q == enc_n) st_q <= T_DRAIN;
        T_DRAIN: if (enc_ready && !enc_cv) st_q <= T_IL;
        T_IL: if (il_last) begin st_q <= T_FRAME; fr_start <= 1'b1; cx_q <= '0; end
        T_FRAME: if (fr_last) st_q <= T_FWAIT;
        T_FWAIT: begin
          if (hdr_mode_q) begin
            if (h_q + 3'd1 == nh_q) begin
              // headers done: encode the payload
              hdr_mode_q <= 1'b0; h_q <= nh_q; st_q <= T_PSTART;
            end else begin
              h_q <= h_q + 3'd1; st_q <= T_HCRC; hc_q <= '0;
            end
          end else if (f_q + 6'd1 == n_frag) begin
            st_q <= T_SEND; fr_q <= '0; sym_blk <= '0; bcnt_q <= 8'(HDR_SYMS); sym_hdr <= 1'b1;
          end else begin
            f_q <= f_q + 6'd1; st_q <= T_FRAME; fr_start <= 1'b1;
          end
        end
        T_SEND: if (sym_req) begin
          sym_valid <= 1'b1;
          sym_bit   <= fbuf_q[fr_q];
          sym_first <= (bcnt_q == 8'(HDR_SYMS) && sym_hdr) || (bcnt_q == 8'(PLD_SYMS) && !sym_hdr);
          fr_q      <= fr_q + 12'd1;
          if (bcnt_q == 8'd1) begin
            sym_blk <= sym_blk + 7'd1;
            if (fr_q + 12'd1 == fw_q) st_q <= T_DONE;
            else if (int'(sym_blk) + 1 < int'(nh_q)) bcnt_q <= 8'(HDR_SYMS);
            else begin bcnt_q <= 8'(PLD_SYMS); sym_hdr <= 1'b0; end
          end else bcnt_q <= bcnt_q - 8'd1;
        end
        T_DONE: begin done <= 1'b1; busy <= 1'b0; st_q <= T_IDLE; end
        default: st_q <= T_IDLE;
      endcase
    end
  end
endmodule
