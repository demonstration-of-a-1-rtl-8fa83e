// mesh_pkg: types, frame layout and helper functions shared by the node's
// transmitter and receiver.
//
// Samples and symbols are complex 16-bit two's-complement pairs (cplx_t).
// A 16-QAM level of +-1/+-3 is represented as +-QS/+-3*QS. The frame is
//   preamble (PRE_LEN BPSK chips) | training antenna 1 (TRAIN_LEN BPSK) |
//   training antenna 2 (TRAIN_LEN BPSK) | pilots (PILOT_LEN QPSK) |
//   header (8 x 16-QAM = 4 bytes) | payload (2 x 16-QAM per byte) |
//   CRC-32 (8 x 16-QAM) | gap (GAP_LEN zero symbols)
// The order of the fields and the 64-byte (512-chip) Golay preamble follow
// the paper; all field lengths other than the preamble, the header layout,
// CRC-32 and the PRBS-15 test pattern are this design's own choices.
//
// Lint note: a package linted on its own reports its constants as unused,
// and training_bits() keeps only the low TRAIN_LEN bits of the full-width
// Golay function result by design.
package mesh_pkg;

  localparam int SW      = 16;    // sample component width
  localparam int QS      = 2048;  // one 16-QAM level unit
  localparam int SPS     = 8;     // samples per symbol at the clock rate
  localparam int PRE_LEN = 512;   // 64-byte preamble = 512 binary chips
  localparam int PRE_LOG = 9;
  localparam int TRAIN_LEN = 64;  // training symbols per transmit antenna
  localparam int PILOT_LEN = 32;  // QPSK pilots (two training bits each)
  localparam int HDR_SYMS  = 8;   // 4 header bytes
  localparam int CRC_SYMS  = 8;   // 4 CRC bytes
  localparam int GAP_LEN   = 16;  // idle symbols between frames
  localparam int NANT      = 2;   // antennas (2x2 MIMO)
  localparam int NBANDS    = 3;   // bands received (the three other nodes)

  typedef struct packed {
    logic signed [SW-1:0] re;
    logic signed [SW-1:0] im;
  } cplx_t;

  // Frame section, advanced once per symbol.
  typedef enum logic [2:0] {
    PH_IDLE, PH_PRE, PH_TR1, PH_TR2, PH_PIL, PH_HDR, PH_PAY, PH_CRC
  } phase_e;

  // Kind of symbol the frame generator requests from the mapper.
  typedef enum logic [1:0] {K_ZERO, K_BPSK, K_QPSK, K_QAM16} kind_e;

  typedef struct packed {
    kind_e      kind;
    logic [3:0] bits;
  } symreq_t;

  // Golay pair by the recursion a_k = [a_{k-1}, b_{k-1}], b_k = [a_{k-1}, -b_{k-1}],
  // a_0 = b_0 = +1. Bit i is 1 for chip +1 and 0 for chip -1, element 0 first.
  function automatic logic [PRE_LEN-1:0] golay_a(input int n);
    logic [PRE_LEN-1:0] a, b, na, nb;
    int len;
    a = '0; b = '0; a[0] = 1'b1; b[0] = 1'b1; len = 1;
    while (len < n) begin
      na = a; nb = a;
      for (int i = 0; i < PRE_LEN; i++)
        if (i < len) begin
          na[len+i] = b[i];
          nb[len+i] = ~b[i];
        end
      a = na; b = nb; len = len * 2;
    end
    return a;
  endfunction

  function automatic logic [PRE_LEN-1:0] golay_b(input int n);
    logic [PRE_LEN-1:0] a, b, na, nb;
    int len;
    a = '0; b = '0; a[0] = 1'b1; b[0] = 1'b1; len = 1;
    while (len < n) begin
      na = a; nb = a;
      for (int i = 0; i < PRE_LEN; i++)
        if (i < len) begin
          na[len+i] = b[i];
          nb[len+i] = ~b[i];
        end
      a = na; b = nb; len = len * 2;
    end
    return b;
  endfunction

  // Transmitted preamble: the Golay sequence a_9 time-reversed, so that the
  // efficient Golay correlator (which convolves with a_9) is its matched filter.
  function automatic logic [PRE_LEN-1:0] preamble_bits();
    logic [PRE_LEN-1:0] a, r;
    a = golay_a(PRE_LEN);
    for (int i = 0; i < PRE_LEN; i++) r[i] = a[PRE_LEN-1-i];
    return r;
  endfunction

  // Training/pilot pattern: Golay b sequence of length TRAIN_LEN.
  function automatic logic [TRAIN_LEN-1:0] training_bits();
    logic [PRE_LEN-1:0] b;
    b = golay_b(TRAIN_LEN);
    return b[TRAIN_LEN-1:0];
  endfunction

  // Gray code per axis: 00 -> -3, 01 -> -1, 11 -> +1, 10 -> +3.
  function automatic logic signed [SW-1:0] gray_level(input logic [1:0] g);
    case (g)
      2'b00:   return SW'(-3 * QS);
      2'b01:   return SW'(-QS);
      2'b11:   return SW'(QS);
      default: return SW'(3 * QS);
    endcase
  endfunction

  // Hard decision on one axis, inverse of gray_level.
  function automatic logic [1:0] gray_slice(input logic signed [SW-1:0] v);
    if (int'(v) < -2 * QS)      return 2'b00;
    else if (v < 0)             return 2'b01;
    else if (int'(v) < 2 * QS)  return 2'b11;
    else                  return 2'b10;
  endfunction

  // CRC-32 (IEEE 802.3, reflected, poly 0xEDB88320), one byte.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc ^ {24'd0, d};
    for (int i = 0; i < 8; i++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  // PRBS-15 (x^15 + x^14 + 1) advanced by 8 bits; returns the new state,
  // the byte produced is the low 8 bits of the result.
  function automatic logic [14:0] prbs15_step8(input logic [14:0] s);
    logic [14:0] r;
    r = s;
    for (int i = 0; i < 8; i++) r = {r[13:0], r[14] ^ r[13]};
    return r;
  endfunction

  localparam logic [14:0] PRBS_SEED = 15'h7FFF;

  // Link-quality and status counters of one receive band.
  typedef struct packed {
    logic [NANT-1:0][31:0] in_power;    // mean |x|^2 per antenna before the matched filter
    logic [31:0] sym_power;             // mean |y|^2 of equalized data symbols
    logic [31:0] noise_power;           // mean |y - decision|^2 of data symbols
    logic [31:0] evm2;                  // EVM^2 of the last frame, Q16
    logic [31:0] ber_errors;            // bit errors against the PRBS-15 pattern
    logic [31:0] ber_bits;              // bits compared
    logic [31:0] frames_ok;             // frames with a correct CRC
    logic [31:0] frames_bad;            // frames with a CRC or header error
    logic [31:0] syncs;                 // preambles acquired
    logic [15:0] last_seq;              // sequence number of the last header
    logic [15:0] last_len;              // payload length of the last header
    logic        last_crc_ok;
    logic [NANT*NANT-1:0][31:0] h;      // channel estimates h[r][t] as {re, im}
  } rx_stat_t;

endpackage
