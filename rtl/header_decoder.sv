// header_decoder: turns a decoded, CRC-checked header into the payload
// information the payload receiver needs.
//
// The 40 decoded header bits (32-bit PHDR then the 8-bit CRC, MSB first) enter
// on bit_valid/bit_in after start. On done, with crc_zero from crc8_unit, the
// PHDR fields are latched: payload length, coding rate, hopping sequence and
// header index (layout phdr_t in lrfhss_pkg), and the number of payload hopping
// blocks is computed as ceil(coded_len(cr, 8*(L+2)+6) / 48). info.valid is set
// only when the CRC is zero, the modulation field is 0 (GMSK) and the packet
// needs at most MAX_FRAGS (52) hopping blocks; hdr_error pulses otherwise. The paper gives the function (payload information for the
// external memory); the field layout is this design's choice.
module header_decoder
  import lrfhss_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          bit_valid,
  input  logic          bit_in,
  input  logic          done,
  input  logic          crc_zero,
  output payload_info_t info,
  output phdr_t         phdr,
  output logic          info_valid,
  output logic          hdr_error
);
  logic [39:0] sr_q;
  phdr_t       f;

  assign f = phdr_t'(sr_q[39:8]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_q <= '0; info <= '0; phdr <= '0; info_valid <= 1'b0; hdr_error <= 1'b0;
    end else begin
      info_valid <= 1'b0;
      hdr_error  <= 1'b0;
      if (start) begin
        sr_q <= '0; info.valid <= 1'b0;
      end else if (bit_valid) begin
        sr_q <= {sr_q[38:0], bit_in};
      end else if (done) begin
        if (crc_zero && f.modulation == 3'd0 &&
            n_payload_frags(f.cr, int'(f.length)) <= MAX_FRAGS) begin
          phdr         <= f;
          info.valid   <= 1'b1;
          info.length  <= f.length;
          info.cr      <= f.cr;
          info.hop_seq <= f.hop_seq;
          info.hdr_idx <= f.hdr_idx;
          info.n_frag  <= 6'(n_payload_frags(f.cr, int'(f.length)));
          info_valid   <= 1'b1;
        end else begin
          info.valid <= 1'b0;
          hdr_error  <= 1'b1;
        end
      end
    end
  end
endmodule
