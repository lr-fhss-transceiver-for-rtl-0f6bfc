// payload_sova: soft-output Viterbi demodulation of one payload hopping block
// (2 preamble + 48 coded symbols).
//
// How it works: the 50 phase-rotated symbols are buffered. Once the last one
// is in, and the initial phase phi_p0 (channel phase at symbol 0) and the
// residual CFO phi_f are known from the preamble, one forward trellis search
// runs over the block with the phase tracking loops of the SOVA core. The
// Doppler rate has already been removed by the Doppler & CFO correction, so
// the rate loop starts at zero. The soft bits of the two preamble symbols
// are discarded and the 48 coded soft bits are output in order.
// Interface: start, 50 x in_valid/in_sample; out_valid/out_llr 48 times, then
// done. A block takes about 50 + 32 + 50 clocks after its last sample.
// Paper vs design: "Payload SOVA" in the payload chain; the single forward
// pass (the header uses the split forward/backward search with Doppler
// candidates) is this design's choice, made because the payload block is
// short and its Doppler is already known from the header.
module payload_sova
  import lrfhss_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               in_valid,
  input  cplx_t              in_sample,
  input  ph32_t              phi_p0,
  input  logic signed [31:0] phi_f,
  input  logic signed [15:0] ua,
  input  logic signed [15:0] ub,
  input  logic signed [15:0] uc,
  output logic               out_valid,
  output llr_t               out_llr,
  output logic               done
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_CSTART, S_FEED, S_FLUSH} st_e;
  st_e st_q;
  cplx_t buf_q [PLD_SYMS];
  logic [5:0] k_q, oc_q;
  logic       fl_seen_q;

  logic core_start, core_in_valid, core_flush, core_flushing, core_out_valid, core_out_bit;
  llr_t core_llr;
  logic signed [31:0] core_best;

  sova_core u_core (
    .clk, .rst_n, .start(core_start), .phi_p0, .phi_f0(phi_f), .phi_dr0(32'sd0),
    .ua, .ub, .uc, .in_valid(core_in_valid), .in_sample(buf_q[k_q]), .flush(core_flush),
    .flushing(core_flushing), .out_valid(core_out_valid), .out_llr(core_llr),
    .out_bit(core_out_bit), .best_pm(core_best));

  assign core_start    = (st_q == S_CSTART);
  assign core_in_valid = (st_q == S_FEED);
  assign core_flush    = (st_q == S_FLUSH) && !fl_seen_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; k_q <= '0; oc_q <= '0; fl_seen_q <= 1'b0;
      out_valid <= 1'b0; out_llr <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (core_out_valid) begin
        oc_q <= oc_q + 6'd1;
        if (oc_q >= 6'(PRE_SYMS)) begin out_valid <= 1'b1; out_llr <= core_llr; end
      end
      if (start) begin
        st_q <= S_LOAD; k_q <= '0;
      end else begin
        unique case (st_q)
          S_IDLE: ;
          S_LOAD: if (in_valid) begin
            buf_q[k_q] <= in_sample;
            if (k_q == 6'(PLD_SYMS - 1)) st_q <= S_CSTART;
            else k_q <= k_q + 6'd1;
          end
          S_CSTART: begin st_q <= S_FEED; k_q <= '0; oc_q <= '0; end
          S_FEED: if (k_q == 6'(PLD_SYMS - 1)) begin st_q <= S_FLUSH; fl_seen_q <= 1'b0; end
                  else k_q <= k_q + 6'd1;
          S_FLUSH: begin
            if (core_flush) fl_seen_q <= 1'b1;
            if (fl_seen_q && !core_flushing) begin st_q <= S_IDLE; done <= 1'b1; end
          end
          default: st_q <= S_IDLE;
        endcase
      end
    end
  end
endmodule
