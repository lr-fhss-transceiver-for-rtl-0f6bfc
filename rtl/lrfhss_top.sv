// lrfhss_top: LR-FHSS transceiver baseband - transmitter encoder with GMSK
// modulator, and the GMSK receiver (channelizer, header detector, header
// receiver, payload receiver).
//
// Data flow: the transmitter encoder builds all hopping blocks of a packet
// and hands out one symbol per tx_sym_req; the GMSK mapper turns each symbol
// into two complex samples (tx_sample) for the DAC. The block markers
// (tx_blk_first, tx_blk_hdr, tx_blk) go to the frequency-hopping controller.
// On the receive side the wideband samples are split by the channelizer into
// NCH channel streams (ch_*) that are written to the external sample memory.
// The memory controller then streams one channel to the header detector
// (det_in_*); a detection (det_valid, det_pos, det_cfo_q8) is followed by
// the header receiver (hr_start, hr_in_*), which uses the detected CFO and
// reports the decoded header (hdr_*). The payload receiver (pr_start, then
// per block pr_blk_start/pr_blk_offset and pr_in_*) uses the header
// receiver's CFO, Doppler rate and timing and outputs the payload bytes
// (pld_byte_*) and the CRC result.
// The external memory, the hopping controller (which channel and time each
// block uses), the CPU and the RF/DAC/ADC parts are outside this module; the
// ports above are their connections.
// Parameters: LOG2N/NCH channelizer size (4096-point FFT, 3120 channels),
// UA/UB/UC the SOVA phase-tracking loop gains.
module lrfhss_top
  import lrfhss_pkg::*;
#(
  parameter int LOG2N = 12,
  parameter int NCH   = 3120,
  parameter int UA    = 3000,
  parameter int UB    = 100,
  parameter int UC    = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  // transmitter
  input  logic               tx_start,
  input  logic [7:0]         tx_length,
  input  code_rate_e         tx_cr,
  input  logic [8:0]         tx_hop_seq,
  input  logic [2:0]         tx_n_hdr,
  input  logic               tx_byte_valid,
  input  logic [7:0]         tx_byte,
  output logic               tx_byte_ready,
  output logic [5:0]         tx_n_frag,
  input  logic               tx_sym_req,
  output logic               tx_sample_valid,
  output cplx_t              tx_sample,
  output logic               tx_blk_first,
  output logic               tx_blk_hdr,
  output logic [6:0]         tx_blk,
  output logic               tx_busy,
  output logic               tx_done,
  // channelizer
  input  logic               wb_valid,
  input  cplx_t              wb_sample,
  output logic               wb_ready,
  output logic               ch_valid,
  output logic [$clog2(NCH)-1:0] ch_idx,
  output cplx_t              ch_sample,
  output logic [15:0]        ch_hop,
  // header detector
  input  logic               det_in_valid,
  input  cplx_t              det_in_sample,
  output logic               det_in_ready,
  output logic               det_valid,
  output logic [31:0]        det_pos,
  output logic signed [31:0] det_cfo_q8,
  output logic [31:0]        det_peak,
  // header receiver
  input  logic               hr_start,
  input  logic               hr_in_valid,
  input  cplx_t              hr_in_sample,
  output logic               hr_in_ready,
  output logic               hdr_done,
  output logic               hdr_ok,
  output payload_info_t      hdr_info,
  output phdr_t              hdr_phdr,
  output logic [1:0]         hdr_seq_used,
  output logic [3:0]         hdr_best_cand,
  // payload receiver
  input  logic               pr_start,
  input  logic               pr_blk_start,
  input  logic signed [31:0] pr_blk_offset,
  input  logic               pr_in_valid,
  input  cplx_t              pr_in_sample,
  output logic               pr_in_ready,
  output logic               pr_blk_done,
  output logic               pld_byte_valid,
  output logic [7:0]         pld_byte,
  output logic               pld_done,
  output logic               pld_crc_ok
);
  localparam logic signed [15:0] UA16 = 16'(UA);
  localparam logic signed [15:0] UB16 = 16'(UB);
  localparam logic signed [15:0] UC16 = 16'(UC);

  // ------------------------------------------------------------ transmitter
  logic sym_valid, sym_bit, sym_first;
  lrfhss_tx u_tx (.clk, .rst_n, .start(tx_start), .length(tx_length), .cr(tx_cr), .hop_seq(tx_hop_seq),
    .n_hdr(tx_n_hdr), .byte_valid(tx_byte_valid), .byte_in(tx_byte), .byte_ready(tx_byte_ready),
    .n_frag(tx_n_frag), .sym_req(tx_sym_req), .sym_valid(sym_valid), .sym_bit(sym_bit),
    .sym_first(sym_first), .sym_hdr(tx_blk_hdr), .sym_blk(tx_blk), .busy(tx_busy), .done(tx_done));
  assign tx_blk_first = sym_valid && sym_first;

  logic map_sym;
  phase_t map_phase;
  gmsk_mapper u_map (.clk, .rst_n, .in_valid(sym_valid), .in_bit(sym_bit), .in_first(sym_first),
    .out_valid(tx_sample_valid), .out_sym(map_sym), .out_sample(tx_sample), .out_phase(map_phase));

  // ------------------------------------------------------------ channelizer
  channelizer #(.LOG2N(LOG2N), .NCH(NCH)) u_chan (.clk, .rst_n, .in_valid(wb_valid), .in_sample(wb_sample),
    .in_ready(wb_ready), .out_valid(ch_valid), .out_ch(ch_idx), .out_sample(ch_sample), .out_hop(ch_hop));

  // ------------------------------------------------------------ header detector
  logic signed [31:0] det_freq, det_freq_q;
  header_detector u_det (.clk, .rst_n, .in_valid(det_in_valid), .in_sample(det_in_sample),
    .in_ready(det_in_ready), .det_valid, .det_pos, .cfo_q8(det_cfo_q8), .det_freq, .det_peak);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) det_freq_q <= '0;
    else if (det_valid) det_freq_q <= det_freq;

  // ------------------------------------------------------------ header receiver
  logic hr_phase;
  logic signed [31:0] hr_pfreq, hr_prate;
  header_receiver u_hrx (.clk, .rst_n, .start(hr_start), .freq(det_freq_q), .ua(UA16), .ub(UB16), .uc(UC16),
    .in_valid(hr_in_valid), .in_sample(hr_in_sample), .in_ready(hr_in_ready), .done(hdr_done),
    .hdr_ok, .info(hdr_info), .phdr(hdr_phdr), .seq_used(hdr_seq_used), .best_cand(hdr_best_cand),
    .timing_phase(hr_phase), .pld_freq(hr_pfreq), .pld_rate(hr_prate));

  // ------------------------------------------------------------ payload receiver
  payload_receiver u_prx (.clk, .rst_n, .start(pr_start), .info(hdr_info), .freq(hr_pfreq), .rate(hr_prate),
    .phase(hr_phase), .ua(UA16), .ub(UB16), .uc(UC16), .blk_start(pr_blk_start), .blk_offset(pr_blk_offset),
    .in_valid(pr_in_valid), .in_sample(pr_in_sample), .in_ready(pr_in_ready), .blk_done(pr_blk_done),
    .byte_valid(pld_byte_valid), .out_byte(pld_byte), .done(pld_done), .crc_ok(pld_crc_ok));
endmodule
