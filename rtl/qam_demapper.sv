// qam_demapper: hard-decision Gray 16-QAM demapper.
//
// Slices each axis of the equalized symbol at 0 and +-2 QS to the nearest of
// +-QS, +-3QS and returns the two Gray bits per axis (in-phase bits[3:2],
// quadrature bits[1:0]; 00 -> -3, 01 -> -1, 11 -> +1, 10 -> +3), which
// inverts qam_mapper. It also outputs the decided constellation point and
// passes the symbol, its frame section and index along for the meters and
// the deframer. Registered, one clock after in_valid.
module qam_demapper
  import mesh_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  cplx_t       y,
  input  phase_e      in_phase,
  input  logic [15:0] in_idx,
  output logic        out_valid,
  output logic [3:0]  bits,
  output cplx_t       dec,
  output cplx_t       y_out,
  output phase_e      out_phase,
  output logic [15:0] out_idx
);
  logic [1:0] bi, bq;
  assign bi = gray_slice(y.re);
  assign bq = gray_slice(y.im);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; bits <= '0; dec <= '0; y_out <= '0;
      out_phase <= PH_IDLE; out_idx <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        bits      <= {bi, bq};
        dec       <= '{gray_level(bi), gray_level(bq)};
        y_out     <= y;
        out_phase <= in_phase;
        out_idx   <= in_idx;
      end
    end
  end
endmodule
