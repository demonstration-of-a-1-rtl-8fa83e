// noise_meter: gated mean power of the decision error.
//
// Forms e = y - d (equalized symbol minus the decided constellation point)
// and averages |e|^2 over windows of 2^LOG_N gated symbols, the same
// integrate-and-dump as the power meter. Together with the power meter on y
// it gives the pre-detection SINR (signal power / noise power). The paper
// names a noise meter next to the power meter after MRC; decision-directed
// error as the noise estimate is this design's choice.
module noise_meter
  import mesh_pkg::*;
#(
  parameter int LOG_N = 6
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  input  logic        valid,
  input  logic        gate,
  input  cplx_t       y,
  input  cplx_t       d,
  output logic [31:0] noise,
  output logic        noise_valid
);
  cplx_t e;
  assign e = '{SW'(y.re - d.re), SW'(y.im - d.im)};
  power_meter #(.LOG_N(LOG_N)) u_pm (
    .clk, .rst, .clear, .valid, .gate, .din(e), .power(noise), .power_valid(noise_valid)
  );
endmodule
