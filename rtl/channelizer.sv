// channelizer: splits the wideband receive signal into narrow channels with a
// windowed FFT, two output samples per channel per LR-FHSS symbol.
//
// How it works: the last N wideband samples are kept in a circular buffer.
// Every N/2 new samples (50 % overlap) the buffer, oldest sample first, is
// multiplied by the window w(k) and loaded into the N-point FFT. The bins of
// the NCH channels around DC are then read out: channel c (0..NCH-1) is bin
// c - NCH/2 (mod N). With a hop of N/2 samples the phase reference of odd
// bins changes by pi per hop; those bins are negated on odd hops so that
// each channel is a continuous complex baseband stream.
// With the default N = 4096 and a wideband rate of N * 488.28 Hz, each bin is
// 488.28 Hz wide and, at two outputs per N samples, each channel is sampled
// at 976.56 Hz, i.e. twice per symbol.
// Interface: in_valid/in_sample with in_ready (low while a transform runs);
// out_valid/out_ch/out_sample, one channel per clock, NCH per hop, towards
// the external sample memory; out_hop counts the hops.
// Paper vs design: the structure "windowing w_k, MK-point FFT" is from the
// receiver figure. The window shape (Hann), the 50 % overlap, the FFT size
// 4096 (the smallest power of two above the 3120 channels) and the sign
// correction are this design's choices.
module channelizer
  import lrfhss_pkg::*;
#(
  parameter int LOG2N = 12,
  parameter int NCH   = 3120
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  cplx_t                  in_sample,
  output logic                   in_ready,
  output logic                   out_valid,
  output logic [$clog2(NCH)-1:0] out_ch,
  output cplx_t                  out_sample,
  output logic [15:0]            out_hop
);
  localparam int N = 1 << LOG2N;

  typedef enum logic [1:0] {S_FILL, S_LOAD, S_FFT, S_OUT} st_e;
  st_e st_q;
  cplx_t            buf_q [N];
  logic [LOG2N-1:0] wp_q;       // next write position = oldest sample
  logic [LOG2N:0]   cnt_q;      // samples since the last transform
  logic             full_q;
  logic [LOG2N-1:0] k_q;
  logic [$clog2(NCH)-1:0] c_q;

  // window: Hann, w(k) = (1 - cos(2*pi*k/N)) / 2, from the shared CORDIC
  cplx_t cs, wx;
  logic [LOG2N-1:0] rk;
  logic signed [31:0] w;
  always_comb begin
    rk   = wp_q + k_q;
    cs   = expj(phase_t'(int'(k_q) << (16 - LOG2N)));
    w    = (4096 - int'(cs.i)) >>> 1;                 // Q12
    wx.i = sat16((int'(buf_q[rk].i) * w) >>> 12);
    wx.q = sat16((int'(buf_q[rk].q) * w) >>> 12);
  end

  logic fft_wr, fft_go, fft_busy, fft_done;
  logic [LOG2N-1:0] fft_rd;
  cplx_t fft_rdata;
  fft_iter #(.LOG2N(LOG2N)) u_fft (
    .clk, .rst_n, .wr_en(fft_wr), .wr_addr(k_q), .wr_data(wx), .go(fft_go),
    .busy(fft_busy), .done(fft_done), .rd_addr(fft_rd), .rd_data(fft_rdata));

  assign fft_wr   = (st_q == S_LOAD);
  assign fft_go   = (st_q == S_LOAD) && (k_q == '1);
  assign fft_rd   = LOG2N'(int'(c_q) - NCH / 2);
  assign in_ready = (st_q == S_FILL);
  logic odd;
  assign odd = fft_rd[0] & out_hop[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_FILL; wp_q <= '0; cnt_q <= '0; full_q <= 1'b0; k_q <= '0; c_q <= '0;
      out_valid <= 1'b0; out_ch <= '0; out_sample <= '0; out_hop <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (st_q)
        S_FILL: if (in_valid) begin
          wp_q  <= wp_q + 1'b1;
          if (wp_q == '1) full_q <= 1'b1;
          if (full_q && cnt_q == (LOG2N+1)'(N / 2 - 1)) begin
            cnt_q <= '0; st_q <= S_LOAD; k_q <= '0;
          end else cnt_q <= cnt_q + 1'b1;
        end
        S_LOAD: begin
          k_q <= k_q + 1'b1;
          if (k_q == '1) st_q <= S_FFT;
        end
        S_FFT: if (fft_done) begin st_q <= S_OUT; c_q <= '0; end
        S_OUT: begin
          out_valid  <= 1'b1;
          out_ch     <= c_q;
          out_sample <= odd ? cplx_t'({sat16(-int'(fft_rdata.i)), sat16(-int'(fft_rdata.q))}) : fft_rdata;
          if (int'(c_q) == NCH - 1) begin st_q <= S_FILL; out_hop <= out_hop + 16'd1; end
          else c_q <= c_q + 1'b1;
        end
        default: st_q <= S_FILL;
      endcase
    end
  end

  always_ff @(posedge clk) if (st_q == S_FILL && in_valid) buf_q[wp_q] <= in_sample;
endmodule
