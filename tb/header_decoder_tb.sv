// header_decoder_tb: random PHDRs (with a few made invalid by the CRC flag,
// a non-GMSK modulation field or a length needing more than 52 blocks) are
// shifted in MSB first followed by 8 CRC bits; after done the payload
// information must match the fields and the block count
// ceil(coded_len(cr, 8*(L+2)+6)/48), or hdr_error must pulse.
module header_decoder_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, bit_valid = 0, bit_in = 0, done = 0, crc_zero = 0;
  payload_info_t info;
  phdr_t phdr;
  logic info_valid, hdr_error;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  header_decoder dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      phdr_t f;
      logic [39:0] bits;
      bit good;
      int nf;
      f = phdr_t'($urandom);
      f.modulation = (r % 7 == 3) ? 3'd1 : 3'd0;
      if (r % 5 != 4) f.length = 8'($urandom % 40);
      crc_zero = (r % 6 != 5);
      nf = (coded_len(f.cr, 8 * (int'(f.length) + 2) + CONV_TAIL) + FRAG_BITS - 1) / FRAG_BITS;
      good = crc_zero && f.modulation == 3'd0 && nf <= MAX_FRAGS;
      bits = {f, 8'($urandom)};
      start = 1; @(negedge clk); start = 0;
      for (int i = 39; i >= 0; i--) begin bit_valid = 1; bit_in = bits[i]; @(negedge clk); end
      bit_valid = 0; done = 1; @(negedge clk); done = 0;
      checks++;
      if (good) begin
        if (!info_valid || !info.valid || info.length != f.length || info.cr != f.cr || info.hop_seq != f.hop_seq ||
            info.hdr_idx != f.hdr_idx || int'(info.n_frag) != nf || phdr != f || hdr_error) begin
          failures++; $display("header %0d: n_frag %0d exp %0d", r, info.n_frag, nf);
        end
      end else if (!hdr_error || info_valid || info.valid) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
