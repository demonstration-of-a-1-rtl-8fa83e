// packetizer: paces the transmit symbol stream and packs it for the
// sample-rate back end.
//
// It issues tick, one clock in every SPS, which steps the whole symbol-rate
// front end (controller, frame generation, mapping, MIMO). The symbol pair
// coming back from the MIMO block a few clocks later is registered into one
// AXI4-Stream-like beat carrying both antennas, with tuser marking the first
// symbol of a frame (first preamble chip) and tlast the last symbol before
// idle. Only the name of this block is in the paper; pacing and framing are
// this design's interpretation. The beat stays valid for one clock.
module packetizer
  import mesh_pkg::*;
#(
  parameter int P_SPS = SPS
) (
  input  logic   clk,
  input  logic   rst,
  output logic   tick,
  input  logic   in_valid,
  input  phase_e in_phase,
  input  cplx_t  in_ant [NANT],
  output logic   m_valid,
  output cplx_t  m_data [NANT],
  output logic   m_user,     // first symbol of a frame
  output logic   m_last      // last symbol of a frame
);
  logic [$clog2(P_SPS)-1:0] div;
  phase_e prev_phase;
  logic   pend;
  cplx_t  pend_data [NANT];
  phase_e pend_phase;

  assign tick = (div == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      div <= '0;
      m_valid <= 1'b0; m_user <= 1'b0; m_last <= 1'b0;
      m_data <= '{default: '0};
      prev_phase <= PH_IDLE;
      pend <= 1'b0; pend_phase <= PH_IDLE; pend_data <= '{default: '0};
    end else begin
      div <= (div == ($clog2(P_SPS))'(P_SPS - 1)) ? '0 : div + 1'b1;
      m_valid <= 1'b0;
      m_user  <= 1'b0;
      m_last  <= 1'b0;
      // Hold one symbol so that tlast can be set on the last one of a frame.
      if (in_valid) begin
        pend       <= 1'b1;
        pend_data  <= in_ant;
        pend_phase <= in_phase;
        if (pend) begin
          m_valid <= 1'b1;
          m_data  <= pend_data;
          m_user  <= (pend_phase == PH_PRE) && (prev_phase != PH_PRE);
          m_last  <= (pend_phase != PH_IDLE) && (in_phase == PH_IDLE);
          prev_phase <= pend_phase;
        end
      end
    end
  end
endmodule
