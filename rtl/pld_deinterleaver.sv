// pld_deinterleaver: restores the coded-bit order of the payload soft bits.
//
// The transmitter spreads the coded payload over n hopping blocks of 48 bits:
// coded bit j is placed at address (j mod n)*48 + (j div n), so consecutive
// coded bits land in different blocks. Here the n*48 received soft bits are
// written in arrival order (block after block) and read back from address 0
// with a stride of 48: 0, 48, ..., (n-1)*48, then 1, 49, ... until all n*48
// soft bits are out (out_valid/out_llr, out_last on the final one). n is taken
// at start (n_frag, 1..MAXF). The stride-48 read order is the paper's; the
// exact write order above is this design's reading of it.
module pld_deinterleaver
  import lrfhss_pkg::*;
#(
  parameter int MAXF = MAX_FRAGS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [5:0] n_frag,
  input  logic       in_valid,
  input  llr_t       in_llr,
  output logic       out_valid,
  output llr_t       out_llr,
  output logic       out_last
);
  localparam int DEPTH = MAXF * FRAG_BITS;
  localparam int AW    = $clog2(DEPTH);

  llr_t        mem_q [DEPTH];
  logic [5:0]  n_q, row_q;
  logic [5:0]  col_q;
  logic [AW-1:0] wr_q;
  logic        reading_q;
  logic [AW-1:0] total;
  logic [AW-1:0] rd_addr;

  assign total   = AW'(int'(n_q) * FRAG_BITS);
  assign rd_addr = AW'(int'(row_q) * FRAG_BITS + int'(col_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q <= 6'd1; row_q <= '0; col_q <= '0; wr_q <= '0; reading_q <= 1'b0;
      out_valid <= 1'b0; out_llr <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (start) begin
        n_q <= (n_frag == 6'd0) ? 6'd1 : n_frag;
        row_q <= '0; col_q <= '0; wr_q <= '0; reading_q <= 1'b0;
      end else if (reading_q) begin
        out_valid <= 1'b1;
        out_llr   <= mem_q[rd_addr];
        if (row_q == n_q - 6'd1) begin
          row_q <= '0;
          if (col_q == 6'(FRAG_BITS - 1)) begin
            out_last <= 1'b1; reading_q <= 1'b0; col_q <= '0; wr_q <= '0;
          end else col_q <= col_q + 6'd1;
        end else row_q <= row_q + 6'd1;
      end else if (in_valid) begin
        mem_q[wr_q] <= in_llr;
        if (wr_q == total - 1'b1) reading_q <= 1'b1;
        else                      wr_q <= wr_q + 1'b1;
      end
    end
  end
endmodule
