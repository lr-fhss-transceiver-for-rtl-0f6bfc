// dewhitener: removes (or, in the transmitter, applies) the payload data
// whitening.
//
// Payload bits pass one per cycle, most significant bit of each byte first
// (in_valid/in_bit -> out_valid/out_bit, one cycle later), XORed with the
// current byte of an 8-bit Fibonacci LFSR (x^8 + x^6 + x^5 + x^4 + 1, seed
// 0xFF): bit b of a byte (b = 7 first) is XORed with lfsr[b], and after the
// eighth bit the LFSR advances by eight steps. The same operation whitens and
// dewhitens. Each finished byte also appears on byte_valid/out_byte. start
// reseeds. The paper only names this block; the sequence is this design's
// choice.
module dewhitener (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       in_valid,
  input  logic       in_bit,
  output logic       out_valid,
  output logic       out_bit,
  output logic       byte_valid,
  output logic [7:0] out_byte
);
  logic [7:0] lfsr_q, byte_q;
  logic [2:0] bit_q;

  function automatic logic [7:0] lfsr_adv8(input logic [7:0] s);
    logic [7:0] r;
    r = s;
    for (int k = 0; k < 8; k++) r = {r[6:0], r[7] ^ r[5] ^ r[4] ^ r[3]};
    return r;
  endfunction

  logic wbit;
  assign wbit = in_bit ^ lfsr_q[3'd7 - bit_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_q <= 8'hFF; byte_q <= '0; bit_q <= '0;
      out_valid <= 1'b0; out_bit <= 1'b0; byte_valid <= 1'b0; out_byte <= '0;
    end else begin
      out_valid  <= 1'b0;
      byte_valid <= 1'b0;
      if (start) begin
        lfsr_q <= 8'hFF; bit_q <= '0; byte_q <= '0;
      end else if (in_valid) begin
        out_valid <= 1'b1;
        out_bit   <= wbit;
        byte_q    <= {byte_q[6:0], wbit};
        bit_q     <= bit_q + 3'd1;
        if (bit_q == 3'd7) begin
          byte_valid <= 1'b1;
          out_byte   <= {byte_q[6:0], wbit};
          lfsr_q     <= lfsr_adv8(lfsr_q);
        end
      end
    end
  end
endmodule
