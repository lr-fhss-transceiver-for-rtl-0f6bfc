// conv_encoder: rate-1/3 convolutional encoder (constraint length 7, 64 states)
// with puncturing to rates 1/2, 2/3 and 5/6, serial coded-bit output.
//
// The mother code has generators CONV_G0/G1/G2 (octal 133, 171, 165). For each
// accepted information bit u the window w = {u, s[0..5]} (s[0] the most recent
// earlier bit) gives c_j = parity(w & G_j). punct_mask() chooses which of c0, c1,
// c2 are sent for the rate selected at start; the kept bits leave one per
// cycle on code_valid/code_bit in the order c0, c1, c2. The encoder therefore
// accepts an information bit (in_valid && in_ready) only when the previous one
// has been fully sent, so one bit takes 1 to 3 cycles.
// start loads the shift register with init_state: zero for a zero-tailed
// payload (the caller appends CONV_TAIL zeros), the last six information bits
// (s[0] = last) for the tail-biting header. The rate-1/3 mother code and the
// puncturing to 1/2, 2/3, 5/6 follow the paper; polynomials and puncturing
// patterns are this design's choice.
module conv_encoder
  import lrfhss_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  code_rate_e cr,
  input  logic [5:0] init_state,
  input  logic       in_valid,
  input  logic       in_bit,
  output logic       in_ready,
  output logic       code_valid,
  output logic       code_bit
);
  logic [5:0]  s_q;
  logic [2:0]  pend_bits_q, pend_mask_q;
  code_rate_e  cr_q;
  logic [15:0] idx_q;
  logic [2:0]  c_new, m_new;
  logic [6:0]  w;

  always_comb begin
    w     = {in_bit, s_q[0], s_q[1], s_q[2], s_q[3], s_q[4], s_q[5]};
    c_new = {^(w & CONV_G2), ^(w & CONV_G1), ^(w & CONV_G0)};
    m_new = punct_mask(cr_q, int'(idx_q));
  end

  assign in_ready = (pend_mask_q == 3'b000) && !start;

  // pick lowest pending kept bit
  logic [1:0] sel;
  always_comb begin
    sel = 2'd0;
    if (pend_mask_q[0])      sel = 2'd0;
    else if (pend_mask_q[1]) sel = 2'd1;
    else                     sel = 2'd2;
  end
  assign code_valid = (pend_mask_q != 3'b000);
  assign code_bit   = pend_bits_q[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q <= '0; pend_bits_q <= '0; pend_mask_q <= '0; cr_q <= CR_1_3; idx_q <= '0;
    end else if (start) begin
      s_q <= init_state; pend_mask_q <= '0; cr_q <= cr; idx_q <= '0;
    end else if (in_valid && in_ready) begin
      s_q         <= {s_q[4:0], in_bit};
      pend_bits_q <= c_new;
      pend_mask_q <= m_new;
      idx_q       <= idx_q + 16'd1;
    end else if (code_valid) begin
      pend_mask_q[sel] <= 1'b0;
    end
  end
endmodule
