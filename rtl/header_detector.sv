// header_detector: finds LR-FHSS header blocks in one channel's sample stream
// and estimates their carrier frequency offset.
//
// How it works: the last W = 64 samples (two per symbol, from midway
// between the last preamble symbol and the first syncword symbol up to the
// last syncword symbol) are multiplied by the coefficients c(k), the conjugate of
// the known GMSK syncword waveform. If the syncword is present the product is
// a single tone at the CFO. The product is zero-padded to M = 128 points and
// transformed by the FFT; |X|^2 is computed for every bin (FFT-shifted so
// that index M/2 is zero frequency) and the peak is found. A window passes
// the threshold when |X_peak|^2 * 2^16 > THR_Q8 * E, with E the energy of
// the product (for a clean syncword the left side equals 256 * E). The
// detection is declared in time at the window whose peak is largest (the
// first window after which the peak falls), and in frequency at its peak bin;
// the arctangent interpolation of the peak and its neighbours refines the
// CFO. After a detection, HOLDOFF samples are ignored.
// Interface: in_valid/in_sample with in_ready (one window evaluation per
// sample, about 7*64 + 3*128 clocks); det_valid pulses with det_pos (index,
// counted from the first sample after reset, of the header block's first
// sample), cfo_q8 (bins of 976.5625/M Hz, 8 fraction bits), det_freq (the
// same CFO as a per-sample phase step, 2^32 = 2*pi) and det_peak.
// Stream convention: sample 2k+1 of a block is the instant of symbol k and
// sample 2k lies midway between symbols k-1 and k.
// Paper vs design: windowing with c_k, M-point FFT, |.|^2, threshold,
// "detection decision in frequency and time" and the fine CFO estimate are
// from the receiver figure; M = 128 follows from its "Index - 64". The
// energy-normalised threshold, the window length and the hold-off are this
// design's choices.
module header_detector
  import lrfhss_pkg::*;
#(
  parameter int LOG2M   = 7,
  parameter int THR_Q8  = 128,
  parameter int HOLDOFF = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  cplx_t              in_sample,
  output logic               in_ready,
  output logic               det_valid,
  output logic [31:0]        det_pos,
  output logic signed [31:0] cfo_q8,
  output logic signed [31:0] det_freq,
  output logic [31:0]        det_peak
);
  localparam int M  = 1 << LOG2M;
  localparam int W  = 2 * SYNC_SYMS;          // 64 samples
  localparam int H0 = 2 * PRE_SYMS - 1;       // half-symbol index of the first window sample

  // coefficient phases (known waveform at the sample instants of the syncword)
  function automatic logic [W*16-1:0] mk_coef();
    logic [W*16-1:0] v;
    for (int j = 0; j < W; j++) v[j*16 +: 16] = known_raw_phase_half(H0 + j);
    return v;
  endfunction
  localparam logic [W*16-1:0] CPH = mk_coef();

  typedef enum logic [2:0] {S_IN, S_LOAD, S_FFT, S_SCAN, S_DEC, S_INTERP} st_e;
  st_e st_q;

  cplx_t       win_q [W];
  logic [5:0]  wp_q;
  logic [31:0] n_q;
  logic [LOG2M-1:0] k_q;
  logic signed [63:0] e_q;
  logic [31:0] mag_q [M];
  logic [31:0] pk_q;
  logic [LOG2M-1:0] pki_q;
  logic [15:0] hold_q;
  // candidate held for the time decision
  logic        has_q;
  logic [31:0] hp_q, hm1_q, hp1_q, hpos_q;
  logic [LOG2M-1:0] hidx_q;

  // load: product of window sample k with c(k)
  cplx_t y;
  always_comb begin
    if (int'(k_q) < W) y = cplx_rot(win_q[6'(wp_q + 6'(k_q))], phase_t'(-CPH[int'(k_q[5:0])*16 +: 16]));
    else               y = '0;
  end

  logic fft_wr, fft_go, fft_done, fft_busy;
  logic [LOG2M-1:0] fft_rd;
  cplx_t fft_rdata;
  fft_iter #(.LOG2N(LOG2M)) u_fft (
    .clk, .rst_n, .wr_en(fft_wr), .wr_addr(k_q), .wr_data(y), .go(fft_go),
    .busy(fft_busy), .done(fft_done), .rd_addr(fft_rd), .rd_data(fft_rdata));
  assign fft_wr = (st_q == S_LOAD);
  assign fft_go = (st_q == S_LOAD) && (k_q == '1);
  assign fft_rd = k_q + LOG2M'(M / 2);      // FFT shift
  assign in_ready = (st_q == S_IN);

  logic [31:0] mag;
  assign mag = 32'(int'(fft_rdata.i) * int'(fft_rdata.i) + int'(fft_rdata.q) * int'(fft_rdata.q));

  logic pass;
  assign pass = (longint'(pk_q) <<< 16) > longint'(THR_Q8) * e_q;

  // fine CFO
  logic pi_valid, pi_out;
  logic signed [31:0] pi_cfo;
  peak_interp #(.M(M)) u_interp (
    .clk, .rst_n, .in_valid(pi_valid), .p_m1(hm1_q), .p_0(hp_q), .p_p1(hp1_q), .index(hidx_q),
    .out_valid(pi_out), .cfo_q8(pi_cfo));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IN; wp_q <= '0; n_q <= '0; k_q <= '0; e_q <= 0; pk_q <= '0; pki_q <= '0;
      hold_q <= '0; has_q <= 1'b0; hp_q <= '0; hm1_q <= '0; hp1_q <= '0; hpos_q <= '0; hidx_q <= '0;
      pi_valid <= 1'b0; det_valid <= 1'b0; det_pos <= '0; cfo_q8 <= '0; det_freq <= '0; det_peak <= '0;
    end else begin
      pi_valid  <= 1'b0;
      det_valid <= 1'b0;
      if (pi_out) begin
        det_valid <= 1'b1;
        cfo_q8    <= pi_cfo;
        // bins of 1/M cycle per sample, 8 fraction bits: 2^32 / (M * 256)
        det_freq  <= pi_cfo <<< (32 - LOG2M - 8);
      end
      unique case (st_q)
        S_IN: if (in_valid) begin
          win_q[wp_q] <= in_sample;
          wp_q <= wp_q + 6'd1;
          n_q  <= n_q + 32'd1;
          if (hold_q != 0) hold_q <= hold_q - 16'd1;
          if (n_q >= 32'(W - 1)) begin st_q <= S_LOAD; k_q <= '0; e_q <= 0; end
        end
        S_LOAD: begin
          e_q <= e_q + longint'(int'(y.i) * int'(y.i) + int'(y.q) * int'(y.q));
          k_q <= k_q + 1'b1;
          if (k_q == '1) st_q <= S_FFT;
        end
        S_FFT: if (fft_done) begin st_q <= S_SCAN; k_q <= '0; pk_q <= '0; end
        S_SCAN: begin
          mag_q[k_q] <= mag;
          if (mag > pk_q) begin pk_q <= mag; pki_q <= k_q; end
          k_q <= k_q + 1'b1;
          if (k_q == '1) st_q <= S_DEC;
        end
        S_DEC: begin
          st_q <= S_IN;
          if (hold_q == 0) begin
            if (pass && (!has_q || pk_q > hp_q)) begin
              has_q  <= 1'b1;
              hp_q   <= pk_q;
              hidx_q <= pki_q;
              hm1_q  <= mag_q[pki_q - 1'b1];
              hp1_q  <= mag_q[pki_q + 1'b1];
              // first sample of the block: the window starts at block sample H0+1
              hpos_q <= n_q - 32'(W) - 32'(H0 + 1);
            end else if (has_q) begin
              has_q    <= 1'b0;
              pi_valid <= 1'b1;
              det_pos  <= hpos_q;
              det_peak <= hp_q;
              hold_q   <= 16'(HOLDOFF);
            end
          end
        end
        default: st_q <= S_IN;
      endcase
    end
  end
endmodule
