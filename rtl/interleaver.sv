// interleaver: transmit-side interleaving of the coded header or payload bits.
//
// Header mode (hdr high): 80 coded bits; coded bit j is stored at address
// hdr_deint_src(j)-1, so that reading the stored bits in address order gives
// the sequence the receiver's deinterleaving order undoes. Payload mode: n*48
// positions; coded bit j is stored at (j mod n)*48 + (j div n), the inverse of
// the receiver's stride-48 reading, and positions never written (padding of
// the last block) stay 0. Coded bits arrive on in_valid/in_bit; in_done (after
// the last one) starts the read-out of all 80 or n*48 bits in address order on
// out_valid/out_bit, one per cycle, out_last on the final one. start clears the
// buffer and takes hdr and n_frag. The header permutation is derived from the
// paper's deinterleaving order; the payload write order is this design's
// reading of the paper's stride-48 description.
module interleaver
  import lrfhss_pkg::*;
#(
  parameter int MAXF = MAX_FRAGS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       hdr,
  input  logic [5:0] n_frag,
  input  logic       in_valid,
  input  logic       in_bit,
  input  logic       in_done,
  output logic       out_valid,
  output logic       out_bit,
  output logic       out_last
);
  localparam int DEPTH = MAXF * FRAG_BITS;
  localparam int AW    = $clog2(DEPTH);

  logic [DEPTH-1:0] mem_q;
  logic          hdr_q, reading_q;
  logic [5:0]    n_q, row_q, col_q;
  logic [AW-1:0] j_q, rd_q, wr_addr, total;

  function automatic logic [AW-1:0] hdr_dst(input logic [AW-1:0] j);
    return AW'(hdr_deint_src(int'(j)) - 1);
  endfunction

  assign total   = hdr_q ? AW'(HDR_CODED) : AW'(int'(n_q) * FRAG_BITS);
  assign wr_addr = hdr_q ? hdr_dst(j_q) : AW'(int'(row_q) * FRAG_BITS + int'(col_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_q <= '0; hdr_q <= 1'b1; reading_q <= 1'b0; n_q <= 6'd1;
      row_q <= '0; col_q <= '0; j_q <= '0; rd_q <= '0;
      out_valid <= 1'b0; out_bit <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (start) begin
        mem_q <= '0; hdr_q <= hdr; n_q <= (n_frag == 6'd0) ? 6'd1 : n_frag;
        reading_q <= 1'b0; row_q <= '0; col_q <= '0; j_q <= '0; rd_q <= '0;
      end else if (reading_q) begin
        out_valid <= 1'b1;
        out_bit   <= mem_q[rd_q];
        if (rd_q == total - 1'b1) begin
          out_last <= 1'b1; reading_q <= 1'b0;
        end else rd_q <= rd_q + 1'b1;
      end else if (in_done) begin
        reading_q <= 1'b1; rd_q <= '0;
      end else if (in_valid && (j_q < total)) begin
        mem_q[wr_addr] <= in_bit;
        j_q <= j_q + 1'b1;
        if (row_q == n_q - 6'd1) begin row_q <= '0; col_q <= col_q + 6'd1; end
        else row_q <= row_q + 6'd1;
      end
    end
  end
endmodule
