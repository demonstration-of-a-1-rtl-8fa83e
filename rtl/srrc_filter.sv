// srrc_filter: 65-tap square-root raised cosine filter.
//
// The transmitter uses it as the pulse-shaping interpolation filter on the
// zero-stuffed symbol stream (SHIFT = 15: a lone symbol comes out with its
// own amplitude at the pulse peak); the receiver uses the same taps as the
// matched filter (SHIFT = 18: the full pulse energy, 6.19 in centre-tap
// units, is scaled by 1/8 so the peak is 0.77 of the sent level). Tap count
// from the paper; roll-off and scaling as described in filt_coef_pkg.
// One sample per enabled clock, latency two enabled clocks.
module srrc_filter
  import mesh_pkg::*;
  import filt_coef_pkg::*;
#(
  parameter int SHIFT = 15
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  cplx_t din,
  output cplx_t dout
);
  fir_filter #(.NTAPS(65), .SHIFT(SHIFT), .COEF(SRRC_COEF)) u_fir (
    .clk, .rst, .en, .din, .dout
  );
endmodule
