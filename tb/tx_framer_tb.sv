// tx_framer_tb: a header block and a payload block with random coded bits
// offered with random valid gaps; the symbol stream must be preamble,
// syncword (header only) and the coded bits in order, with the right length
// and sym_first/sym_last flags.
module tx_framer_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, blk_start = 0, blk_hdr = 0, in_valid = 0, in_bit = 0;
  logic in_ready, sym_valid, sym_bit, sym_first, sym_last, busy;
  int checks = 0, failures = 0, nsym;
  bit expb [$];
  bit coded [$];
  always #5 clk = ~clk;
  tx_framer dut (.*);
  always @(posedge clk) if (rst_n && sym_valid) begin
    checks++;
    if (nsym >= expb.size() || sym_bit !== expb[nsym] || sym_first != (nsym == 0) || sym_last != (nsym == expb.size() - 1)) failures++;
    nsym++;
  end
  // coded-bit source
  always @(negedge clk) begin
    if (rst_n && in_valid && in_ready_d) void'(coded.pop_front());
    in_valid = (coded.size() > 0) && ($urandom % 4 != 0);
    in_bit   = (coded.size() > 0) ? coded[0] : 1'b0;
  end
  logic in_ready_d;
  always @(posedge clk) in_ready_d <= in_ready && in_valid;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      int nc;
      blk_hdr = r[0]; nc = blk_hdr ? HDR_CODED : FRAG_BITS;
      expb.delete(); nsym = 0;
      for (int k = 0; k < PRE_SYMS + (blk_hdr ? SYNC_SYMS : 0); k++) expb.push_back(hdr_known_bit(k));
      for (int j = 0; j < nc; j++) begin bit b; b = 1'($urandom); expb.push_back(b); coded.push_back(b); end
      blk_start = 1; @(negedge clk); blk_start = 0;
      repeat (600) @(negedge clk);
      checks++; if (nsym != expb.size() || busy) begin failures++; $display("nsym %0d exp %0d", nsym, expb.size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
