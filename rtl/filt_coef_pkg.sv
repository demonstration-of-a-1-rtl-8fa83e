// filt_coef_pkg: FIR coefficients of the node (Q1.15, real, symmetric).
//
// SRRC_COEF: 65-tap square-root raised cosine, 8 samples per symbol,
//   roll-off 0.5, centre tap scaled to 32767:
//     h(t) = [sin(pi t (1-a)) + 4 a t cos(pi t (1+a))] / [pi t (1 - (4 a t)^2)],
//     t = (n - 32) / 8, h(0) = 1 - a + 4a/pi, and the limit value at |t| = 1/(4a).
//   65 taps are the paper's; roll-off 0.5 follows from its 37.44 MHz band
//   and 24.96 Mbaud (37.44 / 24.96 = 1.5). Sum of squares is 6.19 x 32767^2.
// LPF_COEF: 63-tap Kaiser-windowed (beta 6) sinc low-pass, cut-off 25 MHz at
//   200 MSps (0.125 fs), scaled to unit DC gain (sum 32768 +- rounding):
//     h(n) = 0.25 sinc(0.25 (n - 31)) w_kaiser(n). Two in cascade give
//   <0.01 dB ripple up to 18.72 MHz and >130 dB rejection from 31.28 MHz,
//   the edge of the neighbouring band 50 MHz away. This filter is this
//   design's choice; the paper only asks for steep cascaded FIR low-passes.
//
// Lint note: linted on its own, the package reports its tables as unused.
package filt_coef_pkg;
  localparam logic signed [15:0] SRRC_COEF [65] = '{
    -291, -251, -110, 97, 309, 455, 474, 344, 87, -220, -474,
    -568, -433, -66, 446, 944, 1224, 1095, 446, -703, -2163, -3588,
    -4522, -4479, -3059, -43, 4522, 10297, 16681, 22890, 28093, 31554, 32767,
    31554, 28093, 22890, 16681, 10297, 4522, -43, -3059, -4479, -4522, -3588,
    -2163, -703, 446, 1095, 1224, 944, 446, -66, -433, -568, -474,
    -220, 87, 344, 474, 455, 309, 97, -110, -251, -291
  };
  localparam logic signed [15:0] LPF_COEF [63] = '{
    -4, -9, -9, 0, 19, 36, 34, 0, -55, -97, -85,
    0, 125, 212, 179, 0, -249, -414, -343, 0, 470, 779,
    648, 0, -915, -1568, -1373, 0, 2396, 5156, 7355, 8193, 7355,
    5156, 2396, 0, -1373, -1568, -915, 0, 648, 779, 470, 0,
    -343, -414, -249, 0, 179, 212, 125, 0, -85, -97, -55,
    0, 34, 36, 19, 0, -9, -9, -4
  };
endpackage
