// gfdm_pkg: types and constants shared by the GFDM transceiver.
//
// Complex samples are pairs of signed 16-bit integers. The waveform
// numbers (K = 512 subcarriers, M = 3 subsymbols, CP 32, CS 16, window 8,
// polar code length 2048 with 32 shortened bits) follow the paper's
// parameter tables; the fixed-point formats are this design's choice:
// filter and twiddle coefficients are Q2.14 (1.0 = 16384) and a QAM level
// step of 2 corresponds to 2*QAM_UNIT in sample units.
package gfdm_pkg;

  localparam int unsigned SW = 16;  // sample width (each of re / im)

  typedef struct packed {
    logic signed [SW-1:0] re;
    logic signed [SW-1:0] im;
  } cplx_t;

  // Waveform defaults (paper, Table I)
  localparam int unsigned K_DEF   = 512;
  localparam int unsigned M_DEF   = 3;
  localparam int unsigned NCP_DEF = 32;
  localparam int unsigned NCS_DEF = 16;
  localparam int unsigned NW_DEF  = 8;

  // Polar code defaults (paper, Table II)
  localparam int unsigned PN_DEF     = 2048;
  localparam int unsigned PSHORT_DEF = 32;

  // Fixed-point conventions (design choice)
  localparam int unsigned QF       = 14;       // coefficient fraction bits
  localparam int signed   Q_ONE    = 1 << QF;
  localparam int signed   QAM_UNIT = 256;      // amplitude of QAM level 1
  localparam int signed   PILOT_A  = 2048;     // pilot amplitude per axis

  typedef enum logic [1:0] {QAM4 = 2'd0, QAM16 = 2'd1, QAM64 = 2'd2, QAM256 = 2'd3} qam_t;
  typedef enum logic [1:0] {R1_2 = 2'd0, R2_3 = 2'd1, R3_4 = 2'd2, R5_6 = 2'd3} rate_t;
  typedef enum logic {CDTM = 1'b0, BDTM = 1'b1} dtm_t;
  typedef enum logic [1:0] {SLOT_SYNC = 2'd0, SLOT_CEP1 = 2'd1, SLOT_CEP2 = 2'd2, SLOT_DATA = 2'd3} slot_t;

  // bits per QAM symbol
  function automatic int unsigned qam_bits(qam_t q);
    return 2 * (int'(q) + 1);
  endfunction

  // number of information bits of a shortened polar code word
  function automatic int unsigned polar_k(int unsigned n_tx, rate_t r);
    case (r)
      R1_2:    return n_tx / 2;
      R2_3:    return (n_tx * 2) / 3;
      R3_4:    return (n_tx * 3) / 4;
      default: return (n_tx * 5) / 6;
    endcase
  endfunction

  function automatic int unsigned popcount32(int unsigned v);
    int unsigned c = 0;
    for (int i = 0; i < 32; i++) c += (v >> i) & 1;
    return c;
  endfunction

  // Q2.14 cosine / sine of 2*pi*num/den, evaluated at elaboration
  function automatic logic signed [SW-1:0] cos_q(int num, int den);
    return SW'($rtoi($floor(16384.0 * $cos(6.283185307179586 * num / den) + 0.5)));
  endfunction
  function automatic logic signed [SW-1:0] sin_q(int num, int den);
    return SW'($rtoi($floor(16384.0 * $sin(6.283185307179586 * num / den) + 0.5)));
  endfunction

  // saturate a wide signed value to SW bits
  function automatic logic signed [SW-1:0] sat(longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return SW'(v);
  endfunction

  // Information set of the shortened polar code. The paper does not give its
  // frozen set; this design ranks bit channels by the polarization weight
  //   PW(i) = sum_j bit_j(i) * 2^(j/4)
  // and keeps the k most reliable of the first n - s indices (the last s
  // indices are shortened: their code bits are known zeros). A bisection on
  // the weight threshold avoids sorting. Returns a mask, bit i = information.
  localparam int unsigned PN_MAX = 2048;
  typedef logic [PN_MAX-1:0] pmask_t;

  // PW(i) in fixed point (2^(j/4) scaled by 2^16, rounded)
  function automatic int unsigned pw(int unsigned i);
    int unsigned w = 0;
    for (int j = 0; j < 12; j++)
      if (i[j]) w += int'($rtoi(65536.0 * (2.0 ** (j / 4.0)) + 0.5));
    return w;
  endfunction

  localparam int unsigned PWW = 22;  // weight width (max PW < 2^22)
  typedef logic [PN_MAX*PWW-1:0] pwtab_t;

  function automatic pmask_t polar_info_mask(int unsigned n, int unsigned s, int unsigned k);
    int unsigned lo = 0, hi = 1 << PWW, mid, cnt, w;
    pwtab_t tab = '0;
    pmask_t m = '0;
    for (int unsigned i = 0; i < n - s; i++) tab[i*PWW +: PWW] = PWW'(pw(i));
    // smallest threshold t with at most k indices (below n-s) of weight > t
    while (hi - lo > 1) begin
      mid = (lo + hi) / 2;
      cnt = 0;
      for (int unsigned i = 0; i < n - s; i++) cnt += int'(tab[i*PWW +: PWW] > mid);
      if (cnt > k) lo = mid; else hi = mid;
    end
    cnt = 0;
    for (int unsigned i = 0; i < n - s; i++) begin
      w = tab[i*PWW +: PWW];
      if (w > hi) begin m[i] = 1'b1; cnt++; end
    end
    // ties at the threshold: take the highest indices first
    for (int unsigned i = n - s; i > 0; i--) begin
      w = tab[(i-1)*PWW +: PWW];
      if (!m[i-1] && cnt < k && w == hi) begin m[i-1] = 1'b1; cnt++; end
    end
    return m;
  endfunction

  // PRBS-15 (x^15 + x^14 + 1), shifted one bit per call; output = bit 14
  function automatic logic [14:0] prbs15_next(logic [14:0] s);
    return {s[13:0], s[14] ^ s[13]};
  endfunction

endpackage
