// mimo_tx: 2x2 MIMO structure of the transmitter.
//
// Decides what each of the two transmit antennas sends for the current
// symbol: the BPSK preamble chip (looked up in the preamble LUT, amplitude
// +-3QS) on both antennas, the training symbol on antenna 1 only during the
// first training interval and on antenna 2 only during the second (so the
// receiver can estimate each antenna's channel on its own), the mapped
// symbol on both antennas for pilots, header, payload and CRC, and zero when
// idle. Dedicated per-antenna training intervals are the paper's; sending
// the same data symbol from both antennas (a single stream, combined by MRC
// at the receiver) is this design's reading of it.
// Timing: registered, one cycle from in_valid to out_valid.
//
// Notes: only the low PRE_LOG bits of in_idx address the preamble (the
// other sections are shorter), and pre_addr is that slice of the input,
// passed straight to the preamble table.
module mimo_tx
  import mesh_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  phase_e              in_phase,
  input  logic [15:0]         in_idx,
  input  cplx_t               in_sym,
  output logic [PRE_LOG-1:0]  pre_addr,
  input  logic                pre_chip,
  output logic                out_valid,
  output phase_e              out_phase,
  output cplx_t               out_ant [NANT]
);
  localparam logic signed [SW-1:0] P3 = SW'(3 * QS);
  localparam logic signed [SW-1:0] M3 = SW'(-3 * QS);

  assign pre_addr = in_idx[PRE_LOG-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_phase <= PH_IDLE;
      out_ant   <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_phase <= in_phase;
        case (in_phase)
          PH_PRE: begin
            out_ant[0] <= '{pre_chip ? P3 : M3, '0};
            out_ant[1] <= '{pre_chip ? P3 : M3, '0};
          end
          PH_TR1: begin
            out_ant[0] <= in_sym;
            out_ant[1] <= '0;
          end
          PH_TR2: begin
            out_ant[0] <= '0;
            out_ant[1] <= in_sym;
          end
          PH_PIL, PH_HDR, PH_PAY, PH_CRC: begin
            out_ant[0] <= in_sym;
            out_ant[1] <= in_sym;
          end
          default: begin
            out_ant[0] <= '0;
            out_ant[1] <= '0;
          end
        endcase
      end
    end
  end
endmodule
