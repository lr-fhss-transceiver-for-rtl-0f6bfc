// crc16_unit: CRC-16 of the LR-FHSS payload, byte oriented.
//
// Decoded payload bits arrive one per cycle (bit_valid). While is_parity is
// low they are collected into bytes, most significant bit first, and every
// complete byte updates a CRC-16 register (polynomial CRC16_POLY = 0x755B,
// initial value CRC16_INIT = 0xFFFF), the same byte circuit the transmitter
// uses to produce its parity. While is_parity is high the bits are shifted into
// a 16-bit register holding the received parity. crc_ok is high when the
// computed register equals the received parity. start reinitialises
// everything. crc is the register value (the transmitter appends it MSB first).
// The byte collection follows the receiver description; the polynomial and
// initial value are this design's choice.
module crc16_unit
  import lrfhss_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        bit_valid,
  input  logic        bit_in,
  input  logic        is_parity,
  output logic [15:0] crc,
  output logic [15:0] rx_parity,
  output logic        crc_ok
);
  logic [15:0] crc_q, par_q;
  logic [7:0]  byte_q;
  logic [2:0]  nbit_q;

  function automatic logic [15:0] crc_byte(input logic [15:0] c, input logic [7:0] d);
    logic [15:0] r;
    r = c;
    for (int k = 7; k >= 0; k--)
      r = {r[14:0], 1'b0} ^ ((r[15] ^ d[k]) ? CRC16_POLY : 16'h0000);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crc_q <= CRC16_INIT; par_q <= '0; byte_q <= '0; nbit_q <= '0;
    end else if (start) begin
      crc_q <= CRC16_INIT; par_q <= '0; byte_q <= '0; nbit_q <= '0;
    end else if (bit_valid) begin
      if (is_parity) begin
        par_q <= {par_q[14:0], bit_in};
      end else begin
        byte_q <= {byte_q[6:0], bit_in};
        nbit_q <= nbit_q + 3'd1;
        if (nbit_q == 3'd7) crc_q <= crc_byte(crc_q, {byte_q[6:0], bit_in});
      end
    end
  end

  assign crc       = crc_q;
  assign rx_parity = par_q;
  assign crc_ok    = (crc_q == par_q);
endmodule
