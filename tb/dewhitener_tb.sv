// dewhitener_tb: whitens random bytes with a reference LFSR
// (x^8+x^6+x^5+x^4+1, seed 0xFF, bit b of a byte XORed with lfsr[b]),
// feeds them bit by bit and checks the recovered bits and bytes.
module dewhitener_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, in_bit = 0;
  logic out_valid, out_bit, byte_valid;
  logic [7:0] out_byte;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dewhitener dut (.*);

  logic [7:0] data [64];
  int nb, nbit;
  always @(posedge clk) if (byte_valid) begin
    checks++; if (out_byte !== data[nb]) begin failures++; $display("byte %0d: %h vs %h", nb, out_byte, data[nb]); end
    nb++;
  end
  always @(posedge clk) if (out_valid) begin
    checks++; if (out_bit !== data[nbit / 8][7 - nbit % 8]) failures++;
    nbit++;
  end

  function automatic logic [7:0] adv8(input logic [7:0] s);
    for (int i = 0; i < 8; i++) s = {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
    return s;
  endfunction

  initial begin
    logic [7:0] l;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      nb = 0; nbit = 0; l = 8'hFF;
      start = 1; @(negedge clk); start = 0;
      for (int i = 0; i < 64; i++) begin
        data[i] = 8'($urandom);
        for (int b = 7; b >= 0; b--) begin in_valid = 1; in_bit = data[i][b] ^ l[b]; @(negedge clk); end
        l = adv8(l);
      end
      in_valid = 0; repeat (3) @(negedge clk);
      checks++; if (nb != 64) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
