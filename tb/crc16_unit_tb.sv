// crc16_unit_tb: random messages of 1..20 bytes, MSB first, then the 16
// parity bits with is_parity high. The register is compared with a
// bit-serial reference (poly 0x755B, init 0xFFFF); crc_ok must be set for the
// right parity and cleared for a flipped parity bit.
module crc16_unit_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, bit_valid = 0, bit_in = 0, is_parity = 0;
  logic [15:0] crc, rx_parity;
  logic crc_ok;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  crc16_unit dut (.*);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [7:0] msg [20];
      logic [15:0] r, par;
      int n;
      n = 1 + $urandom % 20;
      r = CRC16_INIT;
      for (int i = 0; i < n; i++) begin
        msg[i] = 8'($urandom);
        for (int b = 7; b >= 0; b--) r = {r[14:0], 1'b0} ^ ((r[15] ^ msg[i][b]) ? CRC16_POLY : 16'h0);
      end
      par = (t % 3 == 2) ? r ^ (16'd1 << ($urandom % 16)) : r;
      start = 1; @(negedge clk); start = 0;
      for (int i = 0; i < n; i++)
        for (int b = 7; b >= 0; b--) begin bit_valid = 1; bit_in = msg[i][b]; @(negedge clk); end
      for (int b = 15; b >= 0; b--) begin bit_valid = 1; is_parity = 1; bit_in = par[b]; @(negedge clk); end
      bit_valid = 0; is_parity = 0; @(negedge clk);
      checks++; if (crc !== r) begin failures++; $display("crc %h ref %h", crc, r); end
      checks++; if (rx_parity !== par) failures++;
      checks++; if (crc_ok !== (par == r)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
