// crc8_unit_tb: feeds random 32-bit words MSB first, compares the register
// with a bit-serial reference CRC (poly 0x2F, init 0xFF), then appends the
// CRC and checks that the register becomes zero (the receiver's check), and
// that a single flipped bit is caught.
module crc8_unit_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, bit_valid = 0, bit_in = 0;
  logic [7:0] crc;
  logic crc_zero;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  crc8_unit dut (.*);

  function automatic logic [7:0] ref_crc(input logic [31:0] w);
    logic [7:0] r;
    r = CRC8_INIT;
    for (int i = 31; i >= 0; i--) r = {r[6:0], 1'b0} ^ ((r[7] ^ w[i]) ? CRC8_POLY : 8'h00);
    return r;
  endfunction

  task automatic send(input logic [39:0] v, input int n);
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    for (int i = n - 1; i >= 0; i--) begin bit_valid = 1; bit_in = v[i]; @(negedge clk); end
    bit_valid = 0; @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      logic [31:0] w;
      logic [7:0] c;
      w = $urandom; c = ref_crc(w);
      send({8'h00, w}, 32);
      checks++; if (crc !== c) begin failures++; $display("crc %h ref %h", crc, c); end
      send({w, c}, 40);
      checks++; if (!crc_zero) failures++;
      send({w, c} ^ (40'd1 << ($urandom % 40)), 40);
      checks++; if (crc_zero) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
