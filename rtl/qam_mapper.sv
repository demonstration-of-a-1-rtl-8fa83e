// qam_mapper: symbol mapping.
//
// Maps a symbol request to a complex symbol: 16-QAM with Gray coding per
// axis (bits[3:2] select the in-phase level, bits[1:0] the quadrature level;
// 00 -> -3, 01 -> -1, 11 -> +1, 10 -> +3, in units of QS), QPSK pilots at the
// corners +-3QS +-j3QS, BPSK training chips at +-3QS on the real axis, and
// zero for idle symbols. Gray-coded 16-QAM is the paper's; the level scale,
// bit order and the pilot/training constellations are this design's.
// Timing: registered, one cycle from in_valid to out_valid.
module qam_mapper
  import mesh_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  symreq_t     in_req,
  output logic        out_valid,
  output cplx_t       out_sym
);
  localparam logic signed [SW-1:0] P3 = SW'(3 * QS);
  localparam logic signed [SW-1:0] M3 = SW'(-3 * QS);

  cplx_t s;
  always_comb begin
    case (in_req.kind)
      K_BPSK:  s = '{in_req.bits[0] ? P3 : M3, '0};
      K_QPSK:  s = '{in_req.bits[1] ? P3 : M3, in_req.bits[0] ? P3 : M3};
      K_QAM16: s = '{gray_level(in_req.bits[3:2]), gray_level(in_req.bits[1:0])};
      default: s = '{'0, '0};
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_sym   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_sym <= s;
    end
  end
endmodule
