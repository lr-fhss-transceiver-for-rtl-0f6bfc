// phase_rotate: multiplies the k-th symbol-spaced sample of a hopping block by
// e^{j*k*pi/2}.
//
// This adds (pi/2)*k to the GMSK phase, which turns the sum of +/-pi/2 steps
// into pi times the number of +1 symbols, so the accumulated phase takes only
// the two values {0, pi} and the trellis needs 4 states instead of 8 (the
// paper's reduction). The rotation is exact: k mod 4 selects a swap and sign
// change of I and Q. in_first restarts k at 0. Output one cycle after input.
module phase_rotate
  import lrfhss_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  cplx_t in_sample,
  output logic  out_valid,
  output logic  out_first,
  output cplx_t out_sample
);
  logic [1:0] k_q, k;
  cplx_t      r;

  assign k = in_first ? 2'd0 : k_q;

  always_comb begin
    unique case (k)
      2'd0: r = in_sample;
      2'd1: begin r.i = sat16(-int'(in_sample.q)); r.q = in_sample.i; end
      2'd2: begin r.i = sat16(-int'(in_sample.i)); r.q = sat16(-int'(in_sample.q)); end
      default: begin r.i = in_sample.q; r.q = sat16(-int'(in_sample.i)); end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_q <= '0; out_valid <= 1'b0; out_first <= 1'b0; out_sample <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_valid && in_first;
      if (in_valid) begin
        out_sample <= r;
        k_q        <= k + 2'd1;
      end
    end
  end
endmodule
