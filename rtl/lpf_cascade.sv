// lpf_cascade: steep band-isolation low-pass filter of one receive branch.
//
// STAGES identical 63-tap FIR low-passes in series (LPF_COEF, unit DC gain,
// cut-off 0.125 of the sample rate). After the NCO has moved one node's band
// to 0 Hz, the cascade passes the +-18.72 MHz band with <0.01 dB ripple and
// suppresses the neighbouring band (from 31.28 MHz, 50 MHz spacing) by over
// 130 dB. The paper asks for cascaded high-order FIRs with steep roll-off;
// the order, window and band plan are this design's.
// One sample per enabled clock, latency 2 x STAGES enabled clocks.
module lpf_cascade
  import mesh_pkg::*;
  import filt_coef_pkg::*;
#(
  parameter int STAGES = 2
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  cplx_t din,
  output cplx_t dout
);
  cplx_t s [STAGES+1];
  assign s[0] = din;
  for (genvar g = 0; g < STAGES; g++) begin : g_st
    fir_filter #(.NTAPS(63), .SHIFT(15), .COEF(LPF_COEF)) u_fir (
      .clk, .rst, .en, .din(s[g]), .dout(s[g+1])
    );
  end
  assign dout = s[STAGES];
endmodule
