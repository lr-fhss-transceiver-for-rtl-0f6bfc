// lrfhss_pkg: types, constants and arithmetic helpers shared by the LR-FHSS
// transmitter encoder and the GMSK LR-FHSS receiver.
//
// Number formats used throughout:
//   cplx_t   complex baseband sample, 16-bit signed I and Q (nominal GMSK
//            amplitude 4096, so that rotations and sums keep headroom)
//   phase_t  16-bit phase, 2^16 = 2*pi (wraps naturally)
//   ph32_t   32-bit phase used inside tracking loops, 2^32 = 2*pi
//   llr_t    8-bit signed soft bit; positive means bit 1 (GMSK symbol +1)
//
// Frame constants follow the LR-FHSS frame used by the design: a header hopping
// block is 2 preamble + 32 syncword + 80 coded bits = 114 symbols, a payload
// hopping block is 2 preamble + 48 coded bits = 50 symbols, syncword 0x2C0F7995.
// The convolutional code polynomials, the CRC polynomials, the puncturing
// patterns, the whitening sequence and the PHDR field layout are this design's
// own choices (see README); they are kept here so that the transmitter and the
// receiver always agree.
package lrfhss_pkg;

  typedef struct packed {
    logic signed [15:0] i;
    logic signed [15:0] q;
  } cplx_t;

  typedef logic [15:0]        phase_t;
  typedef logic [31:0]        ph32_t;
  typedef logic signed [7:0]  llr_t;

  // Coding rate codes as carried in the PHDR.
  typedef enum logic [1:0] {CR_5_6 = 2'd0, CR_2_3 = 2'd1, CR_1_2 = 2'd2, CR_1_3 = 2'd3} code_rate_e;

  // ---------------------------------------------------------------- frame
  localparam logic [31:0] SYNCWORD   = 32'h2C0F_7995;
  localparam int PRE_SYMS            = 2;
  localparam int SYNC_SYMS           = 32;
  localparam int HDR_BITS            = 40;   // 32-bit PHDR + 8-bit CRC
  localparam int HDR_CODED           = 80;
  localparam int HDR_SYMS            = PRE_SYMS + SYNC_SYMS + HDR_CODED; // 114
  localparam int FRAG_BITS           = 48;
  localparam int PLD_SYMS            = PRE_SYMS + FRAG_BITS;             // 50
  localparam logic [1:0] PREAMBLE    = 2'b00; // sent first-bit-first (bit 1 then bit 0)
  localparam int HDR_MID             = 57;   // first symbol of the forward trellis search

  // ---------------------------------------------------------------- codes
  // Rate-1/3 mother code, constraint length 7 (64 states), octal 133/171/165.
  localparam logic [6:0] CONV_G0 = 7'o133;
  localparam logic [6:0] CONV_G1 = 7'o171;
  localparam logic [6:0] CONV_G2 = 7'o165;
  localparam int         CONV_TAIL = 6;
  localparam logic [7:0]  CRC8_POLY  = 8'h2F;
  localparam logic [7:0]  CRC8_INIT  = 8'hFF;
  localparam logic [15:0] CRC16_POLY = 16'h755B;
  localparam logic [15:0] CRC16_INIT = 16'hFFFF;

  // ---------------------------------------------------------------- GMSK
  // Phase contributed at a symbol instant by the previous and the current
  // symbol (3*pi/8 and pi/8); together they give the +/-90 degree step.
  localparam int GMSK_C1 = 12288;  // 3*pi/8 in phase_t units
  localparam int GMSK_C0 = 4096;   // pi/8
  // Doppler-rate candidate step: 80 Hz/s at 488.28 symbols/s expressed as a
  // per-symbol^2 increment of a ph32_t phase: 80 * (2.048e-3)^2 * 2^32.
  localparam int DR_STEP     = 1441151;
  localparam int N_DR_CAND   = 11;

  // ---------------------------------------------------------------- CORDIC
  localparam int CORDIC_N = 14;
  localparam int CORDIC_ATAN [CORDIC_N] = '{8192, 4836, 2555, 1297, 651, 326, 163, 81, 41, 20, 10, 5, 3, 1};
  localparam int CORDIC_GAIN_Q15 = 19898;   // 1/1.6468 in Q15

  function automatic logic signed [15:0] sat16(input int v);
    if (v > 32767)       return 16'sd32767;
    else if (v < -32768) return -16'sd32768;
    else                 return 16'(v);
  endfunction

  // Rotate a by +ang (counter-clockwise). Exact 90 degree pre-rotation, then
  // 14 shift-add micro-rotations, then gain compensation.
  function automatic cplx_t cplx_rot(input cplx_t a, input phase_t ang);
    int x, y, xt, z;
    cplx_t r;
    unique case (ang[15:14])
      2'd0: begin x =  int'(a.i); y =  int'(a.q); end
      2'd1: begin x = -int'(a.q); y =  int'(a.i); end
      2'd2: begin x = -int'(a.i); y = -int'(a.q); end
      default: begin x = int'(a.q); y = -int'(a.i); end
    endcase
    z = int'({2'b00, ang[13:0]});
    for (int k = 0; k < CORDIC_N; k++) begin
      xt = x;
      if (z >= 0) begin x = x - (y >>> k); y = y + (xt >>> k); z = z - CORDIC_ATAN[k]; end
      else        begin x = x + (y >>> k); y = y - (xt >>> k); z = z + CORDIC_ATAN[k]; end
    end
    r.i = sat16((x * CORDIC_GAIN_Q15) >>> 15);
    r.q = sat16((y * CORDIC_GAIN_Q15) >>> 15);
    return r;
  endfunction

  // Angle of (x + jy) in phase_t units (vectoring CORDIC). Inputs up to 2^28.
  function automatic phase_t atan2_ph(input int xin, input int yin);
    int x, y, xt, z;
    x = xin; y = yin; z = 0;
    if (x < 0) begin x = -x; y = -y; z = 32768; end
    for (int k = 0; k < CORDIC_N; k++) begin
      xt = x;
      if (y > 0) begin x = x + (y >>> k); y = y - (xt >>> k); z = z + CORDIC_ATAN[k]; end
      else       begin x = x - (y >>> k); y = y + (xt >>> k); z = z - CORDIC_ATAN[k]; end
    end
    return phase_t'(z);
  endfunction

  // Unit-amplitude (4096) complex exponential e^{j*ang}.
  function automatic cplx_t expj(input phase_t ang);
    cplx_t one;
    one.i = 16'sd4096; one.q = 16'sd0;
    return cplx_rot(one, ang);
  endfunction

  function automatic cplx_t cplx_conj(input cplx_t a);
    cplx_t r;
    r.i = a.i; r.q = sat16(-int'(a.q));
    return r;
  endfunction

  // ---------------------------------------------------------------- frame bits
  // Bit k (0 = first sent) of the 34 known leading symbols of a header block.
  function automatic logic hdr_known_bit(input int k);
    if (k < 0 || k >= PRE_SYMS + SYNC_SYMS) return 1'b0;   // outside the known part
    else if (k < PRE_SYMS) return PREAMBLE[PRE_SYMS-1-k];
    else                   return SYNCWORD[31-(k-PRE_SYMS)];
  endfunction

  // Phase (phase_t, rotated trellis domain, see phase_rotate) of symbol k of a
  // block whose first bits are given, as seen after the k*pi/2 rotation:
  // pi*b_k + c1*a_{k-1} + c0*a_k with a_{-1} = -1 and b_0 = 0.
  function automatic phase_t known_rot_phase(input int k);
    int b, am1, ak;
    // b_k = sum of a~_i for i = -1..k-2 (mod 2), with a~_{-1} = 0
    b = 0;
    for (int i = 0; i <= k-2; i++) if (hdr_known_bit(i)) b ^= 1;
    am1 = (k >= 1 && hdr_known_bit(k-1)) ? 1 : -1;
    ak  = hdr_known_bit(k) ? 1 : -1;
    return phase_t'(b * 32768 + GMSK_C1 * am1 + GMSK_C0 * ak);
  endfunction

  // Phase (raw, un-rotated) at half-symbol instant h of the known header part:
  // even h = symbol h/2, odd h = midway between two symbol instants.
  function automatic phase_t known_raw_phase_half(input int h);
    phase_t p0, p1;
    int k;
    k  = h / 2;
    p0 = known_rot_phase(k) - phase_t'(k * 16384);
    if (h % 2 == 0) return p0;
    p1 = known_rot_phase(k + 1) - phase_t'((k + 1) * 16384);
    return p0 + phase_t'(int'($signed(p1 - p0)) / 2);
  endfunction

  // Tables of the two functions above for the 34 known symbols, for use with
  // a run-time symbol index (the functions are only evaluated at elaboration).
  localparam int NKNOWN = PRE_SYMS + SYNC_SYMS;

  function automatic logic [NKNOWN*16-1:0] mk_krot_tab();
    logic [NKNOWN*16-1:0] v;
    for (int k = 0; k < NKNOWN; k++) v[k*16 +: 16] = known_rot_phase(k);
    return v;
  endfunction
  localparam logic [NKNOWN*16-1:0] KROT_TAB = mk_krot_tab();

  // raw GMSK phase step from symbol k-1 to symbol k (0 for k = 0)
  function automatic logic [NKNOWN*16-1:0] mk_kstep_tab();
    logic [NKNOWN*16-1:0] v;
    v[15:0] = '0;
    for (int k = 1; k < NKNOWN; k++) v[k*16 +: 16] = known_raw_phase_half(2 * k) - known_raw_phase_half(2 * k - 2);
    return v;
  endfunction
  localparam logic [NKNOWN*16-1:0] KSTEP_TAB = mk_kstep_tab();

  function automatic phase_t krot(input logic [6:0] k);
    return (int'(k) < NKNOWN) ? KROT_TAB[int'(k)*16 +: 16] : phase_t'(0);
  endfunction

  function automatic phase_t kstep(input logic [6:0] k);
    return (int'(k) < NKNOWN) ? KSTEP_TAB[int'(k)*16 +: 16] : phase_t'(0);
  endfunction

  // ---------------------------------------------------------------- puncturing
  // Which of the three mother-code bits of input bit number idx are sent.
  function automatic logic [2:0] punct_mask(input code_rate_e cr, input int idx);
    unique case (cr)
      CR_1_3: return 3'b111;
      CR_1_2: return 3'b011;
      CR_2_3: return (idx % 2 == 0) ? 3'b011 : 3'b001;
      default: begin // 5/6: per 5 input bits keep c0c1, c0, c1, c0, c1
        unique case (idx % 5)
          0: return 3'b011;
          1: return 3'b001;
          2: return 3'b010;
          3: return 3'b001;
          default: return 3'b010;
        endcase
      end
    endcase
  endfunction

  // Coded length of nbits information bits (tail included) at rate cr.
  function automatic int coded_len(input code_rate_e cr, input int nbits);
    unique case (cr)
      CR_1_3: return 3 * nbits;
      CR_1_2: return 2 * nbits;
      CR_2_3: return 3 * (nbits / 2) + 2 * (nbits % 2);
      default: begin
        int pre5 [5] = '{0, 2, 3, 4, 5};
        return 6 * (nbits / 5) + pre5[nbits % 5];
      end
    endcase
  endfunction

  // Number of payload hopping blocks for an L-byte payload.
  function automatic int n_payload_frags(input code_rate_e cr, input int len_bytes);
    int nb;
    nb = (len_bytes + 2) * 8 + CONV_TAIL;
    return (coded_len(cr, nb) + FRAG_BITS - 1) / FRAG_BITS;
  endfunction

  // Header deinterleaving order (1-based source index of output bit j).
  function automatic int hdr_deint_src(input int j);
    int t [HDR_CODED] = '{ 1, 18, 26, 34, 42, 50, 58, 66, 73,  2, 10, 27, 35, 43, 51, 59,
                          67, 74,  3, 11, 19, 36, 44, 52, 60, 68, 75,  4, 12, 20, 28, 45,
                          53, 61, 69, 76,  5, 13, 21, 29, 37, 54, 62, 70, 77,  6, 14, 22,
                          30, 38, 46, 63, 71, 78,  7, 15, 23, 31, 39, 47, 55, 72, 79,  8,
                          16, 24, 32, 40, 48, 56, 64, 80,  9, 17, 25, 33, 41, 49, 57, 65};
    return t[j];
  endfunction

  // ---------------------------------------------------------------- PHDR
  typedef struct packed {
    logic [7:0] length;      // payload bytes
    logic [2:0] modulation;  // 0: GMSK 488 Hz
    code_rate_e cr;
    logic       grid;
    logic       hopping;
    logic [3:0] bw;
    logic [8:0] hop_seq;
    logic [1:0] hdr_idx;
    logic [1:0] rsvd;
  } phdr_t;   // 32 bits, sent MSB first

  typedef struct packed {
    logic       valid;
    logic [7:0] length;
    code_rate_e cr;
    logic [8:0] hop_seq;
    logic [1:0] hdr_idx;
    logic [5:0] n_frag;
  } payload_info_t;

  // Maximum number of payload hopping blocks of the longest packet.
  localparam int MAX_FRAGS = 52;

endpackage
