// tx_chain: the node's transmitter, from payload bytes to two antenna
// sample streams for the RF-DAC.
//
// Symbol-rate front end, stepped once every SPS clocks by the packetizer's
// tick: payload FIFO -> controller -> frame generation (training LUT, CRC)
// -> 16-QAM mapping -> 2x2 MIMO structure (preamble LUT, per-antenna
// training intervals) -> packetizer. Sample-rate back end, per antenna,
// one sample per clock: zero-stuffing x SPS -> 65-tap SRRC pulse shaping
// -> programmable gain -> NCO up-conversion to the node's band. This is the
// paper's transmitter block diagram; the RF-DAC interface is left to the
// vendor data converter, dac[] is complex baseband at the clock rate.
//
// Interface: s_axis_* carries payload bytes (valid/ready). pay_len is the
// payload size of each frame in bytes; a frame starts when that many bytes
// are buffered. gain is Q4.12, freq the NCO word (f = freq/2^32 f_clk).
// Latency from the tick that starts a frame to its first preamble sample at
// dac[] is 4 symbols + 9 clocks.
module tx_chain
  import mesh_pkg::*;
#(
  parameter int FIFO_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic [15:0] pay_len,
  input  logic [15:0] gain,
  input  logic [31:0] freq,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic [7:0]  s_axis_tdata,
  output cplx_t       dac [NANT],
  output logic        frame_start,
  output logic        frame_end,
  output logic        underrun,
  output logic [15:0] seq,
  output logic        sym_sof,     // packetized symbol stream: first frame symbol
  output logic        sym_eof      // packetized symbol stream: last frame symbol
);
  localparam int FAW = $clog2(FIFO_DEPTH);

  logic           tick;
  logic           f_valid, f_pop;
  logic [7:0]     f_data;
  logic [FAW:0]   f_count;
  phase_e         c_phase;
  logic [15:0]    c_idx, c_len;
  logic           c_valid;
  logic [$clog2(TRAIN_LEN)-1:0] tra, trb;
  logic           tba, tbb;
  logic           g_valid;
  phase_e         g_phase, g_phase_q;
  logic [15:0]    g_idx, g_idx_q;
  symreq_t        g_req;
  logic           m_valid;
  cplx_t          m_sym;
  logic [PRE_LOG-1:0] pa;
  logic           pchip;
  logic           x_valid;
  phase_e         x_phase;
  cplx_t          x_ant [NANT];
  logic           p_valid, p_user, p_last;
  cplx_t          p_data [NANT];
  cplx_t          u_smp [NANT];

  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .s_valid(s_axis_tvalid), .s_ready(s_axis_tready), .s_data(s_axis_tdata),
    .m_valid(f_valid), .m_ready(f_pop), .m_data(f_data), .count(f_count)
  );

  tx_controller #(.FIFO_AW(FAW)) u_ctrl (
    .clk, .rst, .enable, .tick, .pay_len, .fifo_count(f_count),
    .phase(c_phase), .idx(c_idx), .seq, .frame_len(c_len), .out_valid(c_valid),
    .frame_start, .frame_end
  );

  training_lut u_tlut (.addr_a(tra), .bit_a(tba), .addr_b(trb), .bit_b(tbb));

  frame_gen u_fgen (
    .clk, .rst, .in_valid(c_valid), .in_phase(c_phase), .in_idx(c_idx),
    .len(c_len), .seq, .fifo_valid(f_valid), .fifo_data(f_data), .fifo_pop(f_pop),
    .tr_addr_a(tra), .tr_addr_b(trb), .tr_bit_a(tba), .tr_bit_b(tbb),
    .out_valid(g_valid), .out_phase(g_phase), .out_idx(g_idx), .out_req(g_req), .underrun
  );

  qam_mapper u_map (
    .clk, .rst, .in_valid(g_valid), .in_req(g_req), .out_valid(m_valid), .out_sym(m_sym)
  );

  // phase and index follow the mapper's one-clock latency
  always_ff @(posedge clk) begin
    if (rst) begin
      g_phase_q <= PH_IDLE;
      g_idx_q   <= '0;
    end else if (g_valid) begin
      g_phase_q <= g_phase;
      g_idx_q   <= g_idx;
    end
  end

  preamble_lut u_plut (.addr(pa), .chip(pchip));

  mimo_tx u_mimo (
    .clk, .rst, .in_valid(m_valid), .in_phase(g_phase_q), .in_idx(g_idx_q), .in_sym(m_sym),
    .pre_addr(pa), .pre_chip(pchip), .out_valid(x_valid), .out_phase(x_phase), .out_ant(x_ant)
  );

  packetizer u_pkt (
    .clk, .rst, .tick, .in_valid(x_valid), .in_phase(x_phase), .in_ant(x_ant),
    .m_valid(p_valid), .m_data(p_data), .m_user(p_user), .m_last(p_last)
  );

  upsampler u_up (.clk, .rst, .in_valid(p_valid), .in_sym(p_data), .out_smp(u_smp));

  for (genvar a = 0; a < NANT; a++) begin : g_ant
    cplx_t sh, gn;
    srrc_filter #(.SHIFT(15)) u_srrc (.clk, .rst, .en(1'b1), .din(u_smp[a]), .dout(sh));
    gain_stage u_gain (.clk, .rst, .en(1'b1), .gain, .din(sh), .dout(gn));
    nco_mixer u_nco (.clk, .rst, .en(1'b1), .freq, .din(gn), .dout(dac[a]));
  end

  assign sym_sof = p_user;
  assign sym_eof = p_last;
endmodule
