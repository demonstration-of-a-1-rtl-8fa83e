// frame_gen: frame generation logic of the transmitter.
//
// For every symbol announced by tx_controller it produces a symbol request
// for the mapper: nothing (idle and preamble; the preamble is inserted later
// by mimo_tx), one BPSK training chip from the training LUT, one QPSK pilot
// (two training chips), or one 16-QAM nibble of the header, payload or CRC.
// Header bytes are {len[7:0], len[15:8], seq[7:0], seq[15:8]}; each byte is
// sent high nibble first. Payload bytes are popped from the FIFO when their
// high nibble is sent. CRC-32 (reflected, initial all ones, final inversion)
// covers header and payload and is sent least significant byte first.
// The paper names the block and the field order; the formats are this
// design's own.
//
// Timing: one cycle from in_valid to out_valid; phase and idx travel along.
module frame_gen
  import mesh_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  phase_e      in_phase,
  input  logic [15:0] in_idx,
  input  logic [15:0] len,
  input  logic [15:0] seq,
  // payload FIFO (first-word-fall-through)
  input  logic        fifo_valid,
  input  logic [7:0]  fifo_data,
  output logic        fifo_pop,
  // training LUT
  output logic [$clog2(TRAIN_LEN)-1:0] tr_addr_a,
  output logic [$clog2(TRAIN_LEN)-1:0] tr_addr_b,
  input  logic        tr_bit_a,
  input  logic        tr_bit_b,
  // to symbol mapping
  output logic        out_valid,
  output phase_e      out_phase,
  output logic [15:0] out_idx,
  output symreq_t     out_req,
  output logic        underrun      // payload byte needed but FIFO empty
);
  localparam int TAW = $clog2(TRAIN_LEN);
  logic [31:0] crc;
  logic [7:0]  byte_q;
  logic [7:0]  cur_byte;
  logic [31:0] crc_out;
  logic [1:0]  bsel;

  assign bsel    = in_idx[2:1];
  assign crc_out = ~crc;

  always_comb begin
    tr_addr_a = '0;
    tr_addr_b = '0;
    if (in_phase == PH_PIL) begin
      tr_addr_a = TAW'({in_idx[TAW-2:0], 1'b0});
      tr_addr_b = TAW'({in_idx[TAW-2:0], 1'b1});
    end else begin
      tr_addr_a = in_idx[TAW-1:0];
    end
  end

  // Byte whose nibble is sent now (header and CRC bytes, payload high nibble).
  always_comb begin
    cur_byte = 8'd0;
    case (in_phase)
      PH_HDR: case (bsel)
                2'd0: cur_byte = len[7:0];
                2'd1: cur_byte = len[15:8];
                2'd2: cur_byte = seq[7:0];
                default: cur_byte = seq[15:8];
              endcase
      PH_PAY: cur_byte = in_idx[0] ? byte_q : fifo_data;
      PH_CRC: case (bsel)
                2'd0: cur_byte = crc_out[7:0];
                2'd1: cur_byte = crc_out[15:8];
                2'd2: cur_byte = crc_out[23:16];
                default: cur_byte = crc_out[31:24];
              endcase
      default: cur_byte = 8'd0;
    endcase
  end

  assign fifo_pop = in_valid && in_phase == PH_PAY && !in_idx[0] && fifo_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      crc <= '1; byte_q <= '0; out_valid <= 1'b0; out_phase <= PH_IDLE;
      out_idx <= '0; out_req <= '0; underrun <= 1'b0;
    end else begin
      out_valid <= in_valid;
      underrun  <= 1'b0;
      if (in_valid) begin
        out_phase <= in_phase;
        out_idx   <= in_idx;
        case (in_phase)
          PH_TR1, PH_TR2: out_req <= '{K_BPSK, {3'b000, tr_bit_a}};
          PH_PIL:         out_req <= '{K_QPSK, {2'b00, tr_bit_a, tr_bit_b}};
          PH_HDR, PH_PAY, PH_CRC:
            out_req <= '{K_QAM16, in_idx[0] ? cur_byte[3:0] : cur_byte[7:4]};
          default:        out_req <= '{K_ZERO, 4'b0000};
        endcase
        if (in_phase == PH_PRE) crc <= '1;
        if ((in_phase == PH_HDR || in_phase == PH_PAY) && !in_idx[0])
          crc <= crc32_byte(crc, cur_byte);
        if (in_phase == PH_PAY && !in_idx[0]) begin
          byte_q   <= fifo_data;
          underrun <= !fifo_valid;
        end
      end
    end
  end
endmodule
