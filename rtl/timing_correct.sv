// timing_correct: picks the symbol-instant samples out of the two-samples-
// per-symbol stream and numbers them.
//
// How it works: after start, input samples are counted; sample n is kept when
// n >= 2*skip + phase and (n - phase) is even, so the output is one sample per
// symbol at the estimated timing phase. NSYM symbols are passed, the first
// flagged with out_first and the last with out_last.
// Interface: start with phase (0/1, from the symbol timing estimator) and
// skip (whole symbols to drop); in_valid/in_sample at two samples per symbol;
// out_valid/out_sample/out_idx one clock later.
// Paper vs design: "Timing correct" appears in both receiver chains; the paper
// does not describe its interpolation. Here the timing error is resolved to
// the nearer of the two half-symbol sample instants, which is this design's
// choice.
module timing_correct
  import lrfhss_pkg::*;
#(
  parameter int NSYM = HDR_SYMS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       phase,
  input  logic [3:0] skip,
  input  logic       in_valid,
  input  cplx_t      in_sample,
  output logic       out_valid,
  output logic       out_first,
  output logic       out_last,
  output logic [6:0] out_idx,
  output cplx_t      out_sample
);
  logic [8:0] n_q;
  logic [6:0] k_q;
  logic       ph_q;
  logic [3:0] skip_q;
  logic       run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q <= '0; k_q <= '0; ph_q <= 1'b0; skip_q <= '0; run_q <= 1'b0;
      out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0; out_idx <= '0; out_sample <= '0;
    end else begin
      out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0;
      if (start) begin
        n_q <= '0; k_q <= '0; ph_q <= phase; skip_q <= skip; run_q <= 1'b1;
      end else if (in_valid && run_q) begin
        n_q <= n_q + 9'd1;
        if (n_q[0] == ph_q && n_q >= 9'({skip_q, 1'b0}) + 9'(ph_q)) begin
          out_valid  <= 1'b1;
          out_first  <= (k_q == 7'd0);
          out_last   <= (k_q == 7'(NSYM - 1));
          out_idx    <= k_q;
          out_sample <= in_sample;
          k_q        <= k_q + 7'd1;
          if (k_q == 7'(NSYM - 1)) run_q <= 1'b0;
        end
      end
    end
  end
endmodule
