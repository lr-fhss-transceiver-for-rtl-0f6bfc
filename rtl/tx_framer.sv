// tx_framer: fragmentation, syncword insert and preamble insert of the
// transmitter; produces the bit sequence of one hopping block at a time.
//
// blk_start (with blk_hdr) begins a block. A header block is the 2 preamble
// bits, the 32 syncword bits (0x2C0F7995, MSB first) and 80 interleaved coded
// header bits: 114 symbols. A payload block is the 2 preamble bits and the next
// 48 interleaved coded payload bits: 50 symbols. Known bits come from the
// constants; coded bits are pulled from the input stream with a valid/ready
// handshake (in_valid && in_ready). One symbol bit leaves per cycle on
// sym_valid/sym_bit, with sym_first on the block's first bit and sym_last on
// its last; busy is high while a block is being sent. The block formats are
// the paper's; the preamble value (PREAMBLE) is this design's choice.
module tx_framer
  import lrfhss_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic blk_start,
  input  logic blk_hdr,
  input  logic in_valid,
  input  logic in_bit,
  output logic in_ready,
  output logic sym_valid,
  output logic sym_bit,
  output logic sym_first,
  output logic sym_last,
  output logic busy
);
  logic       act_q, hdr_q;
  logic [6:0] k_q;
  logic [6:0] len;
  logic       known, kbit;

  assign len   = hdr_q ? 7'(HDR_SYMS) : 7'(PLD_SYMS);
  assign known = hdr_q ? (k_q < 7'(PRE_SYMS + SYNC_SYMS)) : (k_q < 7'(PRE_SYMS));
  assign kbit  = hdr_known_bit(int'(k_q));
  assign in_ready = act_q && !known;
  assign busy  = act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= 1'b0; hdr_q <= 1'b0; k_q <= '0;
      sym_valid <= 1'b0; sym_bit <= 1'b0; sym_first <= 1'b0; sym_last <= 1'b0;
    end else begin
      sym_valid <= 1'b0; sym_first <= 1'b0; sym_last <= 1'b0;
      if (!act_q) begin
        if (blk_start) begin act_q <= 1'b1; hdr_q <= blk_hdr; k_q <= '0; end
      end else if (known || in_valid) begin
        sym_valid <= 1'b1;
        sym_bit   <= known ? kbit : in_bit;
        sym_first <= (k_q == 7'd0);
        sym_last  <= (k_q == len - 7'd1);
        if (k_q == len - 7'd1) act_q <= 1'b0;
        else                   k_q <= k_q + 7'd1;
      end
    end
  end
endmodule
