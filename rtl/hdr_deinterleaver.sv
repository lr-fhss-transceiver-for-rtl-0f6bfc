// hdr_deinterleaver: restores the coded-bit order of the 80 header soft bits.
//
// The 80 soft bits of one header block (symbols 35..114) are written in arrival
// order (in_valid/in_llr). When the 80th has been written the block is read
// out one soft bit per cycle on out_valid/out_llr, output bit j being stored
// bit hdr_deint_src(j)-1, the deinterleaving order printed in the paper
// ({1, 18, 26, ...}); out_last marks bit 79. start (or reset) empties the
// buffer; a new block may be written once out_last has been seen.
module hdr_deinterleaver
  import lrfhss_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic in_valid,
  input  llr_t in_llr,
  output logic out_valid,
  output llr_t out_llr,
  output logic out_last
);
  llr_t       mem_q [HDR_CODED];
  logic [6:0] wr_q, rd_q;
  logic       reading_q;

  function automatic logic [6:0] src_addr(input logic [6:0] j);
    return 7'(hdr_deint_src(int'(j)) - 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q <= '0; rd_q <= '0; reading_q <= 1'b0;
      out_valid <= 1'b0; out_llr <= '0; out_last <= 1'b0;
      for (int k = 0; k < HDR_CODED; k++) mem_q[k] <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (start) begin
        wr_q <= '0; rd_q <= '0; reading_q <= 1'b0;
      end else if (reading_q) begin
        out_valid <= 1'b1;
        out_llr   <= mem_q[src_addr(rd_q)];
        out_last  <= (rd_q == 7'(HDR_CODED - 1));
        if (rd_q == 7'(HDR_CODED - 1)) begin
          reading_q <= 1'b0; rd_q <= '0; wr_q <= '0;
        end else begin
          rd_q <= rd_q + 7'd1;
        end
      end else if (in_valid) begin
        mem_q[wr_q] <= in_llr;
        if (wr_q == 7'(HDR_CODED - 1)) reading_q <= 1'b1;
        else                           wr_q <= wr_q + 7'd1;
      end
    end
  end
endmodule
