// crc8_unit: serial CRC-8 of the 40-bit LR-FHSS header (32-bit PHDR + 8-bit CRC).
//
// One bit enters per cycle when bit_valid is high, most significant bit first,
// into a shift register that divides by CRC8_POLY (x^8+x^5+x^3+x^2+x+1, 0x2F)
// starting from CRC8_INIT. The transmitter feeds the 32 PHDR bits and reads
// crc as the 8 check bits to append. The receiver feeds all 40 bits; the header
// is error free when the register is then zero (crc_zero), which is the check
// the design uses. start clears the register to CRC8_INIT in the same cycle;
// crc and crc_zero are registered and valid the cycle after the last bit.
// The polynomial and initial value are this design's choice.
module crc8_unit
  import lrfhss_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       bit_valid,
  input  logic       bit_in,
  output logic [7:0] crc,
  output logic       crc_zero
);
  logic [7:0] reg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          reg_q <= CRC8_INIT;
    else if (start)      reg_q <= CRC8_INIT;
    else if (bit_valid)  reg_q <= {reg_q[6:0], 1'b0} ^ ((reg_q[7] ^ bit_in) ? CRC8_POLY : 8'h00);
  end

  assign crc      = reg_q;
  assign crc_zero = (reg_q == 8'h00);
endmodule
