// rx_deframer: data reformatting at the end of the receiver.
//
// Takes the demapped nibbles of a frame's data symbols (index 0 onwards)
// and undoes the frame format of frame_gen: nibbles 0..7 are the header
// {len[7:0], len[15:8], seq[7:0], seq[15:8]} (high nibble first), the next
// 2 len nibbles the payload, the last 8 the CRC-32 (least significant byte
// first) over header and payload. Payload bytes leave on an AXI4-Stream-
// like byte output (no back-pressure: the radio cannot stall, a FIFO
// follows) with m_last on the last byte. After the CRC it pulses
// frame_done and reports crc_ok and the header; a length of zero or above
// MAX_LEN ends the frame at once as bad. pay_gate marks payload nibbles for
// the BER counter and the meters. Reformatting is the paper's; the header
// and CRC format are this design's.
//
// Note: the lowest byte of the CRC shift register is never compared; the
// last CRC byte is taken straight from the incoming nibbles.
module rx_deframer
  import mesh_pkg::*;
#(
  parameter int MAX_LEN = 8192
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync,
  input  logic        in_valid,
  input  logic [3:0]  nib,
  input  phase_e      in_phase,
  output logic        pay_gate,
  output logic        m_valid,
  output logic [7:0]  m_data,
  output logic        m_last,
  output logic        frame_done,
  output logic        crc_ok,
  output logic [15:0] hdr_len,
  output logic [15:0] hdr_seq,
  output logic [31:0] frames_ok,
  output logic [31:0] frames_bad
);
  typedef enum logic [1:0] {D_HDR, D_PAY, D_CRC, D_OFF} st_e;
  st_e         st;
  logic [3:0]  hi_nib;
  logic        lo;            // current nibble is a low nibble
  logic [15:0] bcnt;          // byte counter within the section
  logic [31:0] crc, crc_rx;
  logic [7:0]  byte_now;
  logic        data;

  assign data     = in_valid && in_phase == PH_PAY;
  assign byte_now = {hi_nib, nib};
  assign pay_gate = data && st == D_PAY;

  always_ff @(posedge clk) begin
    if (rst || sync) begin
      st <= D_HDR; hi_nib <= '0; lo <= 1'b0; bcnt <= '0; crc <= '1; crc_rx <= '0;
      m_valid <= 1'b0; m_data <= '0; m_last <= 1'b0; frame_done <= 1'b0;
      if (rst) begin
        crc_ok <= 1'b0; hdr_len <= '0; hdr_seq <= '0; frames_ok <= '0; frames_bad <= '0;
      end
    end else begin
      m_valid    <= 1'b0;
      m_last     <= 1'b0;
      frame_done <= 1'b0;
      if (data && st != D_OFF) begin
        lo <= ~lo;
        if (!lo) hi_nib <= nib;
        else begin
          bcnt <= bcnt + 1'b1;
          case (st)
            D_HDR: begin
              crc <= crc32_byte(crc, byte_now);
              case (bcnt[1:0])
                2'd0: hdr_len[7:0]  <= byte_now;
                2'd1: hdr_len[15:8] <= byte_now;
                2'd2: hdr_seq[7:0]  <= byte_now;
                default: hdr_seq[15:8] <= byte_now;
              endcase
              if (bcnt == 16'd3) begin
                bcnt <= '0;
                if (hdr_len == 0 || 32'(hdr_len) > MAX_LEN) begin
                  st <= D_OFF;
                  frame_done <= 1'b1;
                  crc_ok <= 1'b0;
                  frames_bad <= frames_bad + 1'b1;
                end else st <= D_PAY;
              end
            end
            D_PAY: begin
              crc     <= crc32_byte(crc, byte_now);
              m_valid <= 1'b1;
              m_data  <= byte_now;
              m_last  <= (bcnt == hdr_len - 1'b1);
              if (bcnt == hdr_len - 1'b1) begin
                bcnt <= '0;
                st   <= D_CRC;
              end
            end
            default: begin // D_CRC
              crc_rx <= {byte_now, crc_rx[31:8]};
              if (bcnt == 16'd3) begin
                st         <= D_OFF;
                frame_done <= 1'b1;
                crc_ok     <= ({byte_now, crc_rx[31:8]} == ~crc);
                if ({byte_now, crc_rx[31:8]} == ~crc) frames_ok <= frames_ok + 1'b1;
                else frames_bad <= frames_bad + 1'b1;
              end
            end
          endcase
        end
      end
    end
  end
endmodule
