// lrfhss_top_full_tb: the end-to-end test of lrfhss_top_tb run on the top at
// its default (full) size, without parameter overrides: the channelizer is the
// 4096-point, 3120-channel one.
//
// For each packet the transmitter encoder and GMSK mapper produce all hopping
// blocks; the bench collects the samples block by block and applies a
// satellite-like channel: a random carrier phase per block (each block is on
// its own hop), one CFO and one Doppler rate (a multiple of 80 Hz/s) that
// evolve continuously over the packet, and small noise. The first header
// block, surrounded by noise, is streamed to the header detector; the header
// receiver is then given the block from the detected position; the payload
// receiver gets every payload block with its time offset. The decoded
// header fields and payload bytes are compared with what was sent.
// Packets: all four code rates, lengths up to 20 bytes, 1..4 header
// replicas; one packet has its first header corrupted (the decoder must
// report a failed header); one payload block is destroyed once at rate 1/3
// (the code must recover it) and once at rate 5/6 (the CRC16 must fail).
// The channelizer is checked on a tone. Each mechanism is counted and one
// that never happens is a failure.
module lrfhss_top_full_tb;
  import lrfhss_pkg::*;
  localparam int LOG2N = 12;    // top defaults: 4096-point FFT
  localparam int NCH   = 3120;  // 3120 channels
  localparam real PI = 3.14159265358979;
  localparam real TS = 2.048e-3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tx_start = 0, tx_byte_valid = 0, tx_sym_req = 0;
  logic [7:0] tx_length = 0, tx_byte = 0;
  code_rate_e tx_cr = CR_1_3;
  logic [8:0] tx_hop_seq = 0;
  logic [2:0] tx_n_hdr = 1;
  logic tx_byte_ready, tx_sample_valid, tx_blk_first, tx_blk_hdr, tx_busy, tx_done;
  logic [5:0] tx_n_frag;
  cplx_t tx_sample;
  logic [6:0] tx_blk;
  logic wb_valid = 0, wb_ready, ch_valid;
  cplx_t wb_sample = '0, ch_sample;
  logic [$clog2(NCH)-1:0] ch_idx;
  logic [15:0] ch_hop;
  logic det_in_valid = 0, det_in_ready, det_valid;
  cplx_t det_in_sample = '0;
  logic [31:0] det_pos, det_peak;
  logic signed [31:0] det_cfo_q8;
  logic hr_start = 0, hr_in_valid = 0, hr_in_ready, hdr_done, hdr_ok;
  cplx_t hr_in_sample = '0;
  payload_info_t hdr_info;
  phdr_t hdr_phdr;
  logic [1:0] hdr_seq_used;
  logic [3:0] hdr_best_cand;
  logic pr_start = 0, pr_blk_start = 0, pr_in_valid = 0, pr_in_ready, pr_blk_done;
  logic signed [31:0] pr_blk_offset = 0;
  cplx_t pr_in_sample = '0;
  logic pld_byte_valid, pld_done, pld_crc_ok;
  logic [7:0] pld_byte;

  lrfhss_top dut (.*);

  // ------------------------------------------------------------ mechanism counters
  int n_pkt, n_hdr_blk, n_pld_blk, n_det, n_hdr_ok, n_hdr_fail, n_crc_ok, n_crc_fail, n_chan_hop;
  int n_rate [4];
  int n_dopp_cand, n_bytes_ok;

  // ------------------------------------------------------------ transmit capture
  cplx_t txs [8192];
  int    blk_start_idx [64];
  int    blk_is_hdr [64];
  int    ntx, nblk;
  always @(posedge clk) if (tx_sample_valid) begin txs[ntx] = tx_sample; ntx++; end
  always @(posedge clk) if (tx_blk_first) begin
    blk_start_idx[nblk] = ntx; blk_is_hdr[nblk] = tx_blk_hdr; nblk++;
  end

  // transmitted symbols and payload SOVA decisions, for diagnostics
  logic txsym [4096];
  int ntxsym, nps;
  logic psd [4096];
  always @(posedge clk) if (dut.sym_valid) begin txsym[ntxsym] = dut.sym_bit; ntxsym++; end
  always @(posedge clk) if (dut.u_prx.ps_ov) begin psd[nps] = dut.u_prx.ps_llr > 0; nps++; end

  // ------------------------------------------------------------ received capture
  logic [7:0] rx_bytes [256];
  int nrx;
  always @(posedge clk) if (pld_byte_valid) begin rx_bytes[nrx] = pld_byte; nrx++; end
  int ndet_pulses;
  always @(posedge clk) if (det_valid) ndet_pulses++;

  // channel output: samples of the whole packet after the channel
  cplx_t rxs [8192];
  int seed;
  bit dbg = 0;
  real gw, grho;

  function automatic real nz();
    return (real'($urandom(seed) % 401) - 200.0);
  endfunction

  task automatic channel(input real fhz, input int cand, input int bad_blk);
    real w, rho, ph, bph, chp;
    int b;
    w   = 2.0 * PI * fhz * TS / 2.0;                              // rad per sample
    rho = 2.0 * PI * (cand - 5) * 80.0 * TS * TS / 4.0;          // rad per sample^2
    gw = w; grho = rho;
    b = -1; bph = 0.0;
    for (int n = 0; n < ntx; n++) begin
      real re, im, ang;
      if (b + 1 < nblk && n == blk_start_idx[b + 1]) begin b++; bph = 2.0 * PI * real'($urandom(seed) % 1000) / 1000.0; end
      chp = bph + w * n + rho * n * (n + 1) / 2.0;
      re  = real'(txs[n].i); im = real'(txs[n].q);
      if (b == bad_blk && (blk_is_hdr[b] == 0 || n - blk_start_idx[b] >= 2 * (PRE_SYMS + SYNC_SYMS))) begin re = real'($urandom(seed) % 8192) - 4096.0; im = real'($urandom(seed) % 8192) - 4096.0; end
      ang = $atan2(im, re) + chp;
      rxs[n].i = 16'($rtoi($sqrt(re * re + im * im) * $cos(ang) + nz()));
      rxs[n].q = 16'($rtoi($sqrt(re * re + im * im) * $sin(ang) + nz()));
    end
  endtask

  task automatic push_det(input cplx_t s);
    // called at a falling edge: wait for in_ready, then offer the sample for one rising edge
    while (!det_in_ready) @(negedge clk);
    det_in_sample = s; det_in_valid = 1;
    @(posedge clk); #1;
    det_in_valid = 0;
    @(negedge clk);
  endtask

  // one packet: returns after the payload receiver is done (or a header failure)
  task automatic packet(input int len, input code_rate_e cr, input int nh, input real fhz, input int cand,
                        input int bad_blk, input bit expect_hdr_ok, input bit expect_crc_ok);
    logic [7:0] data [256];
    int pos0, hdr_mid, timeout;
    ntx = 0; nblk = 0; nrx = 0; ntxsym = 0; nps = 0;
    for (int i = 0; i < len; i++) data[i] = 8'($urandom(seed));
    // ---------------- transmit
    @(negedge clk);
    tx_length = 8'(len); tx_cr = cr; tx_n_hdr = 3'(nh); tx_hop_seq = 9'($urandom(seed));
    tx_start = 1; @(negedge clk); tx_start = 0;
    for (int i = 0; i < len; i++) begin
      tx_byte = data[i]; tx_byte_valid = 1;
      @(posedge clk); while (!tx_byte_ready) @(posedge clk);
      #1 tx_byte_valid = 0;
      @(negedge clk);
    end
    timeout = 0;
    while (!tx_done && timeout < 200000) begin
      @(negedge clk); timeout++;
      tx_sym_req = (timeout % 4 == 0);
    end
    tx_sym_req = 0;
    repeat (10) @(negedge clk);
    n_pkt++;
    n_rate[int'(cr)]++;
    checks++;
    if (tx_n_frag != 6'(n_payload_frags(cr, len)) || nblk != nh + int'(tx_n_frag)) begin
      failures++; $display("tx blocks: nblk %0d nh %0d nfrag %0d", nblk, nh, tx_n_frag);
    end
    for (int b = 0; b < nblk; b++) begin
      int blen;
      blen = (b + 1 < nblk ? blk_start_idx[b + 1] : ntx) - blk_start_idx[b];
      checks++;
      if (blk_is_hdr[b] != (b < nh)) failures++;
      if (blk_is_hdr[b]) begin n_hdr_blk++; if (blen != 2 * HDR_SYMS) begin failures++; $display("hdr blen %0d", blen); end end
      else begin n_pld_blk++; if (blen != 2 * PLD_SYMS) begin failures++; $display("pld blen %0d", blen); end end
    end
    // ---------------- channel
    channel(fhz, cand, bad_blk);
    // ---------------- detection on the first header block, 40 noise samples ahead
    ndet_pulses = 0;
    begin
      int base;
      base = 0;
      // the detector counts samples from reset; remember where this stream starts
      base = int'(dut.u_det.n_q);
      for (int n = 0; n < 40; n++) push_det(cplx_t'({16'($rtoi(nz())), 16'($rtoi(nz()))}));
      for (int n = 0; n < 2 * HDR_SYMS; n++) push_det(rxs[n]);
      for (int n = 0; n < 70; n++) push_det(cplx_t'({16'($rtoi(nz())), 16'($rtoi(nz()))}));
      repeat (5) @(negedge clk);
      checks++;
      if (ndet_pulses != 1) begin failures++; $display("detections %0d", ndet_pulses); end
      else n_det++;
      pos0 = int'(det_pos) - base - 40;     // detected start relative to the block
      checks++;
      if (pos0 < -1 || pos0 > 1) begin failures++; $display("det pos off by %0d", pos0); end
      checks++;   // CFO at the window centre (sample 36) within 2 Hz; cfo_q8 in bins of 976.5625/128 Hz
      begin
        real fc, est;
        fc  = fhz + (cand - 5) * 80.0 * 36.0 * TS / 2.0;
        est = real'(det_cfo_q8) / 256.0 * 976.5625 / 128.0;
        if (est - fc > 2.0 || est - fc < -2.0) begin failures++; $display("cfo est %f Hz, true %f", est, fc); end
      end
      pos0 = (pos0 < -1 || pos0 > 1) ? 0 : pos0;
    end
    // ---------------- header receiver, from the detected position
    @(negedge clk); hr_start = 1; @(negedge clk); hr_start = 0;
    for (int n = pos0; n < pos0 + 2 * HDR_SYMS + 1; n++) begin
      hr_in_sample = (n >= 0 && n < ntx) ? rxs[n] : cplx_t'(0); hr_in_valid = 1;
      @(posedge clk); while (!hr_in_ready) @(posedge clk);
      #1 hr_in_valid = 0;
      @(negedge clk);
    end
    timeout = 0;
    while (!hdr_done && timeout < 100000) begin @(negedge clk); timeout++; end
    checks++;
    if (hdr_ok !== expect_hdr_ok) begin failures++; $display("hdr_ok %0d expected %0d", hdr_ok, expect_hdr_ok); end
    if (!hdr_ok) begin n_hdr_fail++; return; end
    n_hdr_ok++;
    checks++;
    if (hdr_info.length != 8'(len) || hdr_info.cr != cr || hdr_info.n_frag != tx_n_frag || hdr_phdr.hdr_idx != 2'd0) begin
      failures++; $display("header fields wrong: len %0d cr %0d nfrag %0d", hdr_info.length, hdr_info.cr, hdr_info.n_frag);
    end
    checks++;
    if (int'(hdr_best_cand) < cand - 1 || int'(hdr_best_cand) > cand + 1) begin
      failures++; $display("doppler cand %0d expected %0d", hdr_best_cand, cand);
    end
    if (hdr_best_cand != 4'd5) n_dopp_cand++;
    $display("packet %0d: doppler candidate %0d (applied %0d), seq %0d", n_pkt, hdr_best_cand, cand, hdr_seq_used);
    // ---------------- payload receiver
    hdr_mid = 34;
    @(negedge clk); pr_start = 1; @(negedge clk); pr_start = 0;
    for (int b = nh; b < nblk; b++) begin
      pr_blk_offset = 32'(blk_start_idx[b] - hdr_mid); pr_blk_start = 1;
      #1 if (dbg) $display("blk %0d f0 %0d truth %0d", b, dut.u_prx.f0, longint'((gw + grho * (blk_start_idx[b] + 0.5)) / (2.0 * PI) * 4294967296.0));
      @(negedge clk); pr_blk_start = 0;
      for (int n = blk_start_idx[b]; n < blk_start_idx[b] + 2 * PLD_SYMS + 1; n++) begin
        pr_in_sample = (n < ntx) ? rxs[n] : cplx_t'(0); pr_in_valid = 1;
        @(posedge clk); while (!pr_in_ready) @(posedge clk);
        #1 pr_in_valid = 0;
        @(negedge clk);
      end
      timeout = 0;
      while (!pr_blk_done && timeout < 5000) begin @(negedge clk); timeout++; end
    end
    timeout = 0;
    while (!pld_done && timeout < 50000) begin @(negedge clk); timeout++; end
    if (dbg) for (int b = nh; b < nblk; b++) begin
      int e;
      e = 0;
      for (int k = 0; k < 48; k++) if (psd[(b - nh) * 48 + k] != txsym[nh * HDR_SYMS + (b - nh) * PLD_SYMS + 2 + k]) e++;
      $display("  payload block %0d: %0d symbol errors", b, e);
    end
    checks++;
    if (!pld_done) begin failures++; $display("payload receiver did not finish"); end
    checks++;
    if (pld_crc_ok !== expect_crc_ok) begin failures++; $display("crc_ok %0d expected %0d", pld_crc_ok, expect_crc_ok); end
    if (pld_crc_ok) n_crc_ok++; else n_crc_fail++;
    if (expect_crc_ok) begin
      int bad;
      bad = 0;
      for (int i = 0; i < len; i++) if (rx_bytes[i] !== data[i]) bad++;
      checks++;
      if (nrx != len || bad != 0) begin failures++; $display("payload: %0d bytes, %0d wrong", nrx, bad); end
      else n_bytes_ok++;
    end
  endtask

  // channelizer: a tone in one bin must come out on its channel
  task automatic chan_test();
    int peak_ch, hops0;
    real best;
    hops0 = int'(ch_hop);
    best = 0.0; peak_ch = -1;
    fork
      begin
        for (int n = 0; n < 3 * (1 << LOG2N); n++) begin
          wb_sample.i = 16'($rtoi(8000.0 * $cos(2.0 * PI * 5.0 * n / (1 << LOG2N))));
          wb_sample.q = 16'($rtoi(8000.0 * $sin(2.0 * PI * 5.0 * n / (1 << LOG2N))));
          wb_valid = 1;
          @(posedge clk); while (!wb_ready) @(posedge clk);
          #1 wb_valid = 0;
        end
      end
      begin
        forever begin
          @(posedge clk);
          if (ch_valid) begin
            real m;
            m = $sqrt(real'(ch_sample.i) ** 2 + real'(ch_sample.q) ** 2);
            if (m > best) begin best = m; peak_ch = int'(ch_idx); end
          end
        end
      end
    join_any
    disable fork;
    repeat (2000) @(posedge clk);
    n_chan_hop += int'(ch_hop) - hops0;
    checks++;
    if (peak_ch != 5 + NCH / 2) begin failures++; $display("channelizer peak at channel %0d", peak_ch); end
  endtask

  initial begin
    seed = 12345;
    repeat (3) @(negedge clk); rst_n = 1;
    chan_test();
    packet(12, CR_1_3, 2,  37.0, 5, -1, 1, 1);
    packet(12, CR_1_2, 1,  37.0, 5, -1, 1, 1);
    packet(12, CR_1_3, 1,  37.0, 7, -1, 1, 1);
    packet(20, CR_1_2, 1, -55.0, 7, -1, 1, 1);
    packet(16, CR_2_3, 3,  12.0, 3, -1, 1, 1);
    packet(10, CR_5_6, 4, -20.0, 6, -1, 1, 1);
    packet(8,  CR_1_2, 1,  25.0, 5,  0, 0, 1);    // header block destroyed
    packet(8,  CR_1_3, 1, -30.0, 5,  2, 1, 1);    // second payload block destroyed, recovered by the code
    packet(8,  CR_5_6, 1, -30.0, 5,  2, 1, 0);    // same loss at rate 5/6: the CRC must fail
    // every mechanism must have happened
    begin
      int mech [string];
      mech["packets sent"] = n_pkt;           mech["header blocks"] = n_hdr_blk;
      mech["payload blocks"] = n_pld_blk;     mech["detections"] = n_det;
      mech["header CRC pass"] = n_hdr_ok;     mech["header rejected"] = n_hdr_fail;
      mech["payload CRC pass"] = n_crc_ok;    mech["payload CRC fail"] = n_crc_fail;
      mech["rate 5/6"] = n_rate[0];           mech["rate 2/3"] = n_rate[1];
      mech["rate 1/2"] = n_rate[2];           mech["rate 1/3"] = n_rate[3];
      mech["non-zero Doppler candidate"] = n_dopp_cand;
      mech["payload bytes correct"] = n_bytes_ok;
      mech["channelizer hops"] = n_chan_hop;
      foreach (mech[k]) begin
        $display("mechanism %-28s %0d", k, mech[k]);
        checks++;
        if (mech[k] == 0) begin failures++; $display("mechanism never happened: %s", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
