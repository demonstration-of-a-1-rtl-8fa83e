// nco_mixer: numerically controlled oscillator and complex mixer.
//
// A PHW-bit phase accumulator advances by freq every enabled clock
// (f = freq / 2^PHW x f_clk, two's complement, so negative words give
// negative frequencies). Its top LUT_BITS bits address a sine table,
// sin_lut.hex: entry i = round(32767 sin(2 pi i / 1024)); the cosine is the
// same table a quarter turn ahead. The input is multiplied by
// exp(+j phase): y = x (cos + j sin), rounded and saturated to 16 bits.
// The transmitter uses it to shift baseband up to its band; each receive
// branch uses it with the band's negated frequency to bring a band to 0 Hz.
// NCO-based conversion is the paper's; phase width, table size and the
// rounding are this design's. Registered, latency two enabled clocks.
module nco_mixer
  import mesh_pkg::*;
#(
  parameter int PHW      = 32,
  parameter int LUT_BITS = 10
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           en,
  input  logic [PHW-1:0] freq,
  input  cplx_t          din,
  output cplx_t          dout
);
  localparam int N = 1 << LUT_BITS;
  logic signed [15:0] lut [N];
  initial $readmemh("rtl/sin_lut.hex", lut);

  logic [PHW-1:0]      ph;
  logic [LUT_BITS-1:0] ia, ic;
  logic signed [15:0]  s_q, c_q;
  cplx_t               x_q;

  assign ia = ph[PHW-1 -: LUT_BITS];
  assign ic = ia + LUT_BITS'(N / 4);

  function automatic logic signed [SW-1:0] rsat(input logic signed [33:0] v);
    logic signed [33:0] r;
    r = (v + 34'sd16384) >>> 15;
    if (r > 34'sd32767)       return 16'sh7FFF;
    else if (r < -34'sd32768) return 16'sh8000;
    else                      return r[SW-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      ph <= '0; s_q <= '0; c_q <= '0; x_q <= '0; dout <= '0;
    end else if (en) begin
      ph   <= ph + freq;
      s_q  <= lut[ia];
      c_q  <= lut[ic];
      x_q  <= din;
      dout <= '{rsat(34'(x_q.re) * 34'(c_q) - 34'(x_q.im) * 34'(s_q)),
                rsat(34'(x_q.re) * 34'(s_q) + 34'(x_q.im) * 34'(c_q))};
    end
  end
endmodule
