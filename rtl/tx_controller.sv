// tx_controller: frame sequencer of the transmitter.
//
// Once per symbol (tick) it emits the frame section and the symbol index
// within it: preamble, training on antenna 1, training on antenna 2, pilots,
// header, payload, CRC, then GAP_LEN idle symbols. A frame starts only when
// the transmitter is enabled and the payload FIFO already holds pay_len
// bytes, so a frame never runs dry in the middle of its payload. The
// section order is the paper's; the section lengths (mesh_pkg), the gap and
// the start rule are this design's choices.
//
// Timing: phase/idx/seq are registered and change only in the cycle after a
// tick; out_valid pulses with them. seq counts frames (modulo 2^16).
//
// Note: pay_len bit 15 is unused: the payload section is 2 x pay_len
// symbols counted in 16 bits, so lengths are limited to 32767 bytes.
module tx_controller
  import mesh_pkg::*;
#(
  parameter int FIFO_AW = 12
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              enable,
  input  logic              tick,
  input  logic [15:0]       pay_len,     // payload bytes per frame
  input  logic [FIFO_AW:0]  fifo_count,
  output phase_e            phase,
  output logic [15:0]       idx,
  output logic [15:0]       seq,
  output logic [15:0]       frame_len,   // pay_len latched at frame start
  output logic              out_valid,
  output logic              frame_start,
  output logic              frame_end
);
  phase_e      st;
  logic [15:0] cnt;
  logic [15:0] gap;
  logic [15:0] len_q;

  assign frame_len = len_q;

  function automatic logic [15:0] sec_len(input phase_e p, input logic [15:0] l);
    case (p)
      PH_PRE:  return 16'(PRE_LEN);
      PH_TR1:  return 16'(TRAIN_LEN);
      PH_TR2:  return 16'(TRAIN_LEN);
      PH_PIL:  return 16'(PILOT_LEN);
      PH_HDR:  return 16'(HDR_SYMS);
      PH_PAY:  return {l[14:0], 1'b0};
      PH_CRC:  return 16'(CRC_SYMS);
      default: return 16'd1;
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= PH_IDLE; cnt <= '0; gap <= '0; len_q <= '0; seq <= '0;
      phase <= PH_IDLE; idx <= '0; out_valid <= 1'b0;
      frame_start <= 1'b0; frame_end <= 1'b0;
    end else begin
      out_valid   <= 1'b0;
      frame_start <= 1'b0;
      frame_end   <= 1'b0;
      if (tick) begin
        out_valid <= 1'b1;
        if (st == PH_IDLE) begin
          phase <= PH_IDLE;
          idx   <= '0;
          if (gap != 0) gap <= gap - 1'b1;
          else if (enable && pay_len != 0 && 17'(fifo_count) >= 17'(pay_len)) begin
            st    <= PH_PRE;
            cnt   <= '0;
            len_q <= pay_len;
          end
        end else begin
          phase <= st;
          idx   <= cnt;
          if (st == PH_PRE && cnt == 0) frame_start <= 1'b1;
          if (cnt == sec_len(st, len_q) - 1'b1) begin
            cnt <= '0;
            if (st == PH_CRC) begin
              st <= PH_IDLE;
              gap <= 16'(GAP_LEN);
              seq <= seq + 1'b1;
              frame_end <= 1'b1;
            end else begin
              st <= phase_e'(st + 1'b1);
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
