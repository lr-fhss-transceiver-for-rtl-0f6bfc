// depuncture: regroups a serial stream of received soft bits into the three
// soft bits of each rate-1/3 mother-code step, inserting zero soft bits where
// the transmitter punctured a coded bit.
//
// For step number idx the rate chosen at start gives punct_mask(cr, idx), the
// set of coded bits c0..c2 that were sent. Incoming soft bits (in_valid/in_llr)
// fill the kept positions in the order c0, c1, c2; when the last kept position
// of the step is filled the three soft bits leave on out_valid/out_llr in the
// following cycle and idx advances. Punctured positions are 0, the neutral soft
// value, as the paper describes. The puncturing patterns are this design's
// choice (see lrfhss_pkg).
module depuncture
  import lrfhss_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  code_rate_e cr,
  input  logic       in_valid,
  input  llr_t       in_llr,
  output logic       out_valid,
  output llr_t       out_llr [3]
);
  code_rate_e  cr_q;
  logic [15:0] idx_q;
  llr_t        acc_q [3];
  logic [2:0]  filled_q;
  logic [2:0]  mask, pos_oh;

  always_comb begin
    mask   = punct_mask(cr_q, int'(idx_q));
    // next kept, not yet filled position
    pos_oh = 3'b000;
    if (mask[0] && !filled_q[0])      pos_oh = 3'b001;
    else if (mask[1] && !filled_q[1]) pos_oh = 3'b010;
    else if (mask[2] && !filled_q[2]) pos_oh = 3'b100;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cr_q <= CR_1_3; idx_q <= '0; filled_q <= '0; out_valid <= 1'b0;
      for (int j = 0; j < 3; j++) begin acc_q[j] <= '0; out_llr[j] <= '0; end
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        cr_q <= cr; idx_q <= '0; filled_q <= '0;
        for (int j = 0; j < 3; j++) acc_q[j] <= '0;
      end else if (in_valid) begin
        if (((filled_q | pos_oh) & mask) == mask) begin
          for (int j = 0; j < 3; j++)
            out_llr[j] <= pos_oh[j] ? in_llr : (filled_q[j] ? acc_q[j] : 8'sd0);
          out_valid <= 1'b1;
          filled_q  <= '0;
          idx_q     <= idx_q + 16'd1;
          for (int j = 0; j < 3; j++) acc_q[j] <= '0;
        end else begin
          for (int j = 0; j < 3; j++) if (pos_oh[j]) acc_q[j] <= in_llr;
          filled_q <= filled_q | pos_oh;
        end
      end
    end
  end
endmodule
