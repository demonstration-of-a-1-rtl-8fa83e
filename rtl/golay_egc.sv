// golay_egc: efficient Golay correlator core (one antenna).
//
// Implements the convolution with the 2^NST-chip Golay sequence a of
// mesh_pkg::golay_a using NST stages instead of 2^NST taps. Stage k keeps
// the b branch of stage k-1 in a circular delay of 2^(k-1) x OSR samples and
// forms a_k = a_{k-1} + b_{k-1}(n - D_k), b_k = a_{k-1} - b_{k-1}(n - D_k),
// starting from a_0 = b_0 = x. Chips are OSR samples apart. corr is the
// combinational a_NST for the sample currently at din (valid high); the
// delays advance on valid. Because the preamble is sent time-reversed,
// corr peaks at 2^NST times the chip amplitude on the last preamble chip.
// The delay lines have no reset (so they can map to RAM); a per-stage flag
// reads them as zero until they have been filled once after reset.
module golay_egc
  import mesh_pkg::*;
#(
  parameter int NST = 9,
  parameter int OSR = 4,
  parameter int CW  = 28
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 valid,
  input  cplx_t                din,
  output logic signed [CW-1:0] corr_re,
  output logic signed [CW-1:0] corr_im
);
  logic signed [CW-1:0] a_re [NST+1];
  logic signed [CW-1:0] a_im [NST+1];
  logic signed [CW-1:0] b_re [NST+1];
  logic signed [CW-1:0] b_im [NST+1];

  assign a_re[0] = CW'(din.re);
  assign a_im[0] = CW'(din.im);
  assign b_re[0] = CW'(din.re);
  assign b_im[0] = CW'(din.im);

  for (genvar k = 1; k <= NST; k++) begin : g_stage
    localparam int D  = (1 << (k - 1)) * OSR;
    localparam int PW = (D > 1) ? $clog2(D) : 1;
    logic signed [CW-1:0] dre [D];
    logic signed [CW-1:0] dim [D];
    logic [PW-1:0] ptr;
    logic          full;     // every entry written since reset
    logic signed [CW-1:0] bd_re, bd_im;
    assign bd_re = full ? dre[ptr] : '0;
    assign bd_im = full ? dim[ptr] : '0;
    assign a_re[k] = a_re[k-1] + bd_re;
    assign a_im[k] = a_im[k-1] + bd_im;
    assign b_re[k] = a_re[k-1] - bd_re;
    assign b_im[k] = a_im[k-1] - bd_im;
    always_ff @(posedge clk) begin
      if (rst) begin
        ptr  <= '0;
        full <= 1'b0;
      end else if (valid) begin
        ptr <= (ptr == PW'(D - 1)) ? '0 : ptr + 1'b1;
        if (ptr == PW'(D - 1)) full <= 1'b1;
      end
    end
    // delay line storage: no reset, so it can be a RAM
    always_ff @(posedge clk) begin
      if (valid) begin
        dre[ptr] <= b_re[k-1];
        dim[ptr] <= b_im[k-1];
      end
    end
  end

  assign corr_re = a_re[NST];
  assign corr_im = a_im[NST];
endmodule
