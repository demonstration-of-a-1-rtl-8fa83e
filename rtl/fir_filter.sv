// fir_filter: direct-form FIR with real coefficients on a complex stream.
//
// On every clock with en high it shifts the input into an NTAPS-long delay
// line and computes y = sum_k COEF[k] * x[n-k] for the real and imaginary
// parts separately, rounds, shifts right by SHIFT and saturates to 16 bits.
// The result is registered: y for the sample taken at an en appears after
// that clock edge (latency one en-clock for the product sum). Used by the
// SRRC filter and the band low-pass filters; the default coefficients are
// the 65-tap SRRC pulse.
module fir_filter
  import mesh_pkg::*;
#(
  parameter int NTAPS = 65,
  parameter int SHIFT = 15,
  parameter logic signed [15:0] COEF [NTAPS] = filt_coef_pkg::SRRC_COEF
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  cplx_t din,
  output cplx_t dout
);
  localparam int AW = 16 + 16 + $clog2(NTAPS) + 1;
  cplx_t dl [NTAPS];
  logic signed [AW-1:0] acc_re, acc_im;

  function automatic logic signed [SW-1:0] sat(input logic signed [AW-1:0] v);
    logic signed [AW-1:0] r;
    r = (v + (AW'(1) <<< (SHIFT - 1))) >>> SHIFT;
    if (r > AW'(32767))       return 16'sh7FFF;
    else if (r < -AW'(32768)) return 16'sh8000;
    else                      return r[SW-1:0];
  endfunction

  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int k = 0; k < NTAPS; k++) begin
      acc_re += AW'(COEF[k]) * AW'(dl[k].re);
      acc_im += AW'(COEF[k]) * AW'(dl[k].im);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dl   <= '{default: '0};
      dout <= '0;
    end else if (en) begin
      dl[0] <= din;
      for (int k = 1; k < NTAPS; k++) dl[k] <= dl[k-1];
      dout <= '{sat(acc_re), sat(acc_im)};
    end
  end
endmodule
