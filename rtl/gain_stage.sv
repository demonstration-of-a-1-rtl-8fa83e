// gain_stage: programmable transmit gain.
//
// Multiplies both parts of a complex sample by an unsigned Q4.12 gain
// (4096 = unity, up to 15.99), rounds to nearest and saturates to 16 bits.
// The paper says a programmable gain stage controls the transmit energy;
// the number format is this design's. Registered, latency one enabled clock.
module gain_stage
  import mesh_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic [15:0] gain,
  input  cplx_t       din,
  output cplx_t       dout
);
  function automatic logic signed [SW-1:0] scale(input logic signed [SW-1:0] x,
                                                 input logic [15:0] g);
    logic signed [33:0] p;
    p = (34'(x) * $signed({18'd0, g}) + 34'sd2048) >>> 12;
    if (p > 34'sd32767)       return 16'sh7FFF;
    else if (p < -34'sd32768) return 16'sh8000;
    else                      return p[SW-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) dout <= '0;
    else if (en) dout <= '{scale(din.re, gain), scale(din.im, gain)};
  end
endmodule
