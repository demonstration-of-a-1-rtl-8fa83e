// upsampler: zero-stuffing interpolator.
//
// Produces one output sample every clock: the symbol of the last accepted
// beat in the clock after it arrives, zeros in the following clocks until
// the next beat. With one beat every SPS clocks this is interpolation by
// SPS with zero insertion; the SRRC filter that follows removes the images.
// Drawn as an up-arrow in the paper's block diagram; the factor is this
// design's (SPS = 8 samples per symbol).
module upsampler
  import mesh_pkg::*;
#(
  parameter int N = NANT
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  cplx_t in_sym [N],
  output cplx_t out_smp [N]
);
  always_ff @(posedge clk) begin
    if (rst) out_smp <= '{default: '0};
    else if (in_valid) out_smp <= in_sym;
    else out_smp <= '{default: '0};
  end
endmodule
