// lrfhss_tx_tb: packets of random bytes at every code rate with 1..4 header
// replicas. The captured symbol stream is checked against an independent
// model of the header path: PHDR fields (length, GMSK, rate, hopping on,
// hopping sequence, replica index), CRC-8 (0x2F, init 0xFF, MSB first),
// tail-biting rate-1/2 encoding (generators 133/171, register preloaded with
// the last six bits), interleaving (coded bit j at position
// hdr_deint_src(j)-1) and framing behind preamble and syncword. For the
// payload the bench checks n_frag = ceil(coded/48), the number and length of
// the blocks (114 and 50 symbols), sym_first/sym_hdr/sym_blk and the preamble
// at the start of every payload block.
module lrfhss_tx_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, byte_valid = 0, sym_req = 0;
  logic [7:0] length = 0, byte_in = 0;
  code_rate_e cr = CR_1_3;
  logic [8:0] hop_seq = 0;
  logic [2:0] n_hdr = 1;
  logic byte_ready, sym_valid, sym_bit, sym_first, sym_hdr, busy, done;
  logic [5:0] n_frag;
  logic [6:0] sym_blk;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  lrfhss_tx dut (.*);

  bit syms [$];
  int blk_start [$];
  bit blk_hdr [$];
  int blk_no [$];
  always @(posedge clk) if (rst_n && sym_valid) begin
    if (sym_first) begin blk_start.push_back(syms.size()); blk_hdr.push_back(sym_hdr); blk_no.push_back(int'(sym_blk)); end
    syms.push_back(sym_bit);
  end

  function automatic logic [7:0] crc8_ref(input logic [31:0] d);
    logic [7:0] c;
    c = 8'hFF;
    for (int i = 31; i >= 0; i--) begin
      logic fb;
      fb = c[7] ^ d[i];
      c = {c[6:0], 1'b0};
      if (fb) c ^= 8'h2F;
    end
    return c;
  endfunction

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      int timeout, nf, nb;
      bit seen_done;
      cr = code_rate_e'(r % 4); length = 8'(4 + $urandom % 30); hop_seq = 9'($urandom);
      n_hdr = 3'(1 + r % 4);
      syms.delete(); blk_start.delete(); blk_hdr.delete(); blk_no.delete();
      start = 1; @(negedge clk); start = 0;
      for (int i = 0; i < int'(length); i++) begin
        byte_in = 8'($urandom); byte_valid = 1;
        @(posedge clk); while (!byte_ready) @(posedge clk);
        #1 byte_valid = 0;
      end
      timeout = 0; seen_done = 0;
      while (!seen_done && timeout < 200000) begin
        if (done) seen_done = 1;
        @(negedge clk); timeout++;
        sym_req = (timeout % 3 == 0);
      end
      sym_req = 0;
      repeat (5) @(negedge clk);
      nb = 8 * (int'(length) + 2) + CONV_TAIL;
      nf = (coded_len(cr, nb) + FRAG_BITS - 1) / FRAG_BITS;
      checks += 3;
      if (!seen_done) begin failures++; $display("not done r %0d", r); end
      if (int'(n_frag) != nf) begin failures++; $display("n_frag %0d exp %0d", n_frag, nf); end
      if (blk_start.size() != int'(n_hdr) + nf || syms.size() != int'(n_hdr) * HDR_SYMS + nf * PLD_SYMS) begin
        failures++; $display("blocks %0d symbols %0d", blk_start.size(), syms.size());
      end
      for (int b = 0; b < blk_start.size() && b < int'(n_hdr) + nf; b++) begin
        int s0;
        s0 = blk_start[b];
        checks += 2;
        if (blk_hdr[b] != (b < int'(n_hdr)) || blk_no[b] != b) begin failures++; $display("blk %0d hdr %0d no %0d", b, blk_hdr[b], blk_no[b]); end
        if (s0 != (b < int'(n_hdr) ? b * HDR_SYMS : int'(n_hdr) * HDR_SYMS + (b - int'(n_hdr)) * PLD_SYMS)) begin failures++; $display("start %0d", s0); end
        for (int k = 0; k < PRE_SYMS; k++) begin checks++; if (syms[s0 + k] != hdr_known_bit(k)) begin failures++; $display("pre r %0d b %0d", r, b); end end
        if (b < int'(n_hdr)) begin
          phdr_t f;
          logic [39:0] hb;
          logic [5:0] s;
          bit coded [HDR_CODED];
          f = '0; f.length = length; f.modulation = 3'd0; f.cr = cr; f.hopping = 1'b1; f.hop_seq = hop_seq; f.hdr_idx = 2'(b);
          hb = {f, crc8_ref(f)};
          for (int i = 0; i < 6; i++) s[i] = hb[5 - i];
          for (int j = 0; j < HDR_BITS; j++) begin
            logic [6:0] w;
            w = {hb[39 - j], s};
            coded[2 * j] = ^(w & CONV_G0); coded[2 * j + 1] = ^(w & CONV_G1);
            s = {hb[39 - j], s[5:1]};
          end
          for (int k = PRE_SYMS; k < NKNOWN; k++) begin checks++; if (syms[s0 + k] != hdr_known_bit(k)) begin failures++; $display("sync r %0d", r); end end
          for (int j = 0; j < HDR_CODED; j++) begin
            checks++;
            if (syms[s0 + NKNOWN + hdr_deint_src(j) - 1] != coded[j]) begin failures++; $display("r %0d b %0d j %0d", r, b, j); end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
