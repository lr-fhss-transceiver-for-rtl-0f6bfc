// fft_iter: in-place, iterative radix-2 decimation-in-time FFT of N = 2^LOG2N
// complex points, one butterfly per clock.
//
// How it works: samples are written in natural order through the load port
// and stored at bit-reversed addresses. After 'go', LOG2N stages of N/2
// butterflies run; the twiddle e^{-j*2*pi*p/N} of each butterfly is produced
// by the shared CORDIC rotation (no twiddle ROM). Every stage halves its
// result, so the output is DFT/N and cannot overflow.
// Interface: wr_en/wr_addr/wr_data load point wr_addr (natural order) while
// idle; go starts the transform; busy is high while it runs and done pulses
// for one clock at the end; rd_addr/rd_data read bin rd_addr combinationally.
// Timing: LOG2N * N/2 clocks from go to done.
// Paper vs design: the paper uses an MK-point FFT in the channelizer and an
// M-point FFT in the header detector; the radix-2 in-place organisation, the
// CORDIC twiddles and the per-stage scaling are this design's choices.
module fft_iter
  import lrfhss_pkg::*;
#(
  parameter int LOG2N = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [LOG2N-1:0] wr_addr,
  input  cplx_t            wr_data,
  input  logic             go,
  output logic             busy,
  output logic             done,
  input  logic [LOG2N-1:0] rd_addr,
  output cplx_t            rd_data
);
  localparam int N = 1 << LOG2N;

  cplx_t mem [N];
  logic [$clog2(LOG2N+1)-1:0] stg_q;
  logic [LOG2N-2:0]           bf_q;

  function automatic logic [LOG2N-1:0] bitrev(input logic [LOG2N-1:0] a);
    for (int i = 0; i < LOG2N; i++) bitrev[i] = a[LOG2N-1-i];
  endfunction

  // butterfly addresses and twiddle
  logic [LOG2N-1:0] ia, ib, pos;
  phase_t           tw;
  cplx_t            xa, xb, xbt, ya, yb;
  always_comb begin
    logic [LOG2N:0] half;
    half = (LOG2N+1)'(1) << stg_q;
    pos  = LOG2N'(bf_q) & LOG2N'(half - 1);
    ia   = LOG2N'(((LOG2N+1)'(bf_q) - (LOG2N+1)'(pos)) << 1) + pos;
    ib   = ia + LOG2N'(half);
    // twiddle angle -2*pi*pos/(2*half)
    tw   = phase_t'(-(int'(pos) << (16 - 1 - int'(stg_q))));
    xa   = mem[ia];
    xb   = mem[ib];
    xbt  = cplx_rot(xb, tw);
    ya.i = 16'((int'(xa.i) + int'(xbt.i)) >>> 1);
    ya.q = 16'((int'(xa.q) + int'(xbt.q)) >>> 1);
    yb.i = 16'((int'(xa.i) - int'(xbt.i)) >>> 1);
    yb.q = 16'((int'(xa.q) - int'(xbt.q)) >>> 1);
  end

  assign rd_data = mem[rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; stg_q <= '0; bf_q <= '0;
    end else begin
      done <= 1'b0;
      if (go && !busy) begin
        busy <= 1'b1; stg_q <= '0; bf_q <= '0;
      end else if (busy) begin
        if (bf_q == '1) begin
          bf_q <= '0;
          if (int'(stg_q) == LOG2N - 1) begin busy <= 1'b0; done <= 1'b1; end
          else stg_q <= stg_q + 1'b1;
        end else bf_q <= bf_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      mem[ia] <= ya;
      mem[ib] <= yb;
    end else if (wr_en) begin
      mem[bitrev(wr_addr)] <= wr_data;
    end
  end
endmodule
