// gmsk_mapper: GMSK symbol mapping of one hopping block into complex
// baseband samples, two per symbol.
//
// Bit 1 is the symbol a = +1, bit 0 is a = -1. At symbol instant k the phase is
//   phi(k) = (pi/2) * sum_{i<=k-2} a_i + (3*pi/8) * a_{k-1} + (pi/8) * a_k,
// which is the phase pulse sampled at the symbol instants: each symbol turns
// the phase by +/-90 degrees spread over two symbols (the trellis branch phases
// of the receiver follow from it). A block starts with the phase at zero and
// a_{-1} = -1. For every input bit (in_valid/in_bit, in_first on the block's
// first bit) two samples of amplitude 4096 leave on consecutive cycles
// (out_valid/out_sample): first the half-symbol sample, whose phase is taken
// midway between phi(k-1) and phi(k), then the symbol-instant sample
// (out_sym high). The input must leave at least one idle cycle between bits.
// The +/-90 degree GMSK phase step is the paper's; the 3/8-1/8 split is read
// from its trellis branch phases; the linear half-symbol phase and the
// two-samples-per-symbol rate (no Gaussian pulse shaping for a DAC) are this
// design's simplifications.
module gmsk_mapper
  import lrfhss_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_bit,
  input  logic   in_first,
  output logic   out_valid,
  output logic   out_sym,
  output cplx_t  out_sample,
  output phase_t out_phase
);
  phase_t acc_q, prev_ph_q, cur_ph_q;
  logic   prev_a_q;    // 1: a_{k-1} = +1
  logic   pend_q;
  phase_t acc_b, prev_ph_b, ph_k, ph_mid;
  logic   prev_a_b;

  always_comb begin
    acc_b     = in_first ? 16'd0 : acc_q;
    prev_a_b  = in_first ? 1'b0  : prev_a_q;
    prev_ph_b = in_first ? phase_t'(-GMSK_C1 - GMSK_C0) : prev_ph_q;
    ph_k      = acc_b + (prev_a_b ? phase_t'(GMSK_C1) : phase_t'(-GMSK_C1))
                      + (in_bit   ? phase_t'(GMSK_C0) : phase_t'(-GMSK_C0));
    ph_mid    = prev_ph_b + phase_t'(int'($signed(ph_k - prev_ph_b)) / 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0; prev_ph_q <= '0; cur_ph_q <= '0; prev_a_q <= 1'b0; pend_q <= 1'b0;
      out_valid <= 1'b0; out_sym <= 1'b0; out_sample <= '0; out_phase <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sym   <= 1'b0;
      if (in_valid) begin
        out_valid  <= 1'b1;
        out_sample <= expj(ph_mid);
        out_phase  <= ph_mid;
        cur_ph_q   <= ph_k;
        pend_q     <= 1'b1;
        acc_q      <= acc_b + (prev_a_b ? 16'd16384 : 16'hC000);
        prev_a_q   <= in_bit;
        prev_ph_q  <= ph_k;
      end else if (pend_q) begin
        pend_q     <= 1'b0;
        out_valid  <= 1'b1;
        out_sym    <= 1'b1;
        out_sample <= expj(cur_ph_q);
        out_phase  <= cur_ph_q;
      end
    end
  end
endmodule
