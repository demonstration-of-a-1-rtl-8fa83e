// mesh_node: programmable-logic datapath of one node of a four-node,
// fully connected FDMA mesh.
//
// Each node transmits one 2x2 MIMO stream in its own band and receives the
// other three nodes' bands at the same time (always-on, frequency-division
// full duplex). Transmit: tx_chain turns payload bytes from the processing
// system into two antenna streams shifted to the node's band (tx_freq).
// Receive: both antennas' complex baseband samples covering the shared
// 200 MHz are split into NBANDS branches; in each, an NCO (rx_freq[b],
// normally minus the band centre) brings band b to 0 Hz and a cascaded FIR
// low-pass isolates it. Each band then has its own receive chain
// (rx_chain), a byte FIFO and an input of the AXI4-Stream switch that merges
// the decoded streams, tagged with the band number, towards the DMA.
// The RF data converters, their interfaces, the DMA and the register bank of
// the processing system are outside: their signals are ports here.
//
// Clock: one clock, one complex sample per antenna per clock (200 MSps at
// 200 MHz), 8 samples per symbol. All configuration inputs are quasi-static.
//
// Note: the transmitter's symbol-stream frame markers, each band's
// acquisition and end-of-frame strobes and its FIFO fill level are not
// brought out; the frame strobes of the transmitter and the per-band
// counters in rx_stat cover the same events.
module mesh_node
  import mesh_pkg::*;
#(
  parameter int TX_FIFO_DEPTH = 4096,
  parameter int RX_FIFO_DEPTH = 4096,
  parameter int MAX_LEN       = 8192
) (
  input  logic               clk,
  input  logic               rst,
  // configuration (processing-system registers)
  input  logic               tx_enable,
  input  logic [15:0]        tx_pay_len,
  input  logic [15:0]        tx_gain,
  input  logic [31:0]        tx_freq,
  input  logic [31:0]        rx_freq [NBANDS],
  input  logic [7:0]         rx_thr,
  input  logic [30:0]        rx_emin,
  input  logic               rx_adapt,
  input  logic               rx_clear,
  // payload from the PS (AXI4-Stream, bytes)
  input  logic               s_axis_tvalid,
  output logic               s_axis_tready,
  input  logic [7:0]         s_axis_tdata,
  // RF data converters (complex baseband, one sample per clock per antenna)
  output cplx_t              dac [NANT],
  input  cplx_t              adc [NANT],
  // decoded payload to the PS (AXI4-Stream, bytes, tid = band)
  output logic               m_axis_tvalid,
  input  logic               m_axis_tready,
  output logic [7:0]         m_axis_tdata,
  output logic               m_axis_tlast,
  output logic [1:0]         m_axis_tid,
  // status
  output logic               tx_frame_start,
  output logic               tx_frame_end,
  output logic               tx_underrun,
  output logic [15:0]        tx_seq,
  output rx_stat_t           rx_stat [NBANDS],
  output logic [31:0]        rx_drops [NBANDS]
);
  localparam int RAW = $clog2(RX_FIFO_DEPTH);
  logic         tx_sof, tx_eof;
  logic [NBANDS-1:0] sw_valid, sw_ready, sw_last;
  logic [7:0]   sw_data [NBANDS];

  tx_chain #(.FIFO_DEPTH(TX_FIFO_DEPTH)) u_tx (
    .clk, .rst, .enable(tx_enable), .pay_len(tx_pay_len), .gain(tx_gain), .freq(tx_freq),
    .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .dac,
    .frame_start(tx_frame_start), .frame_end(tx_frame_end), .underrun(tx_underrun),
    .seq(tx_seq), .sym_sof(tx_sof), .sym_eof(tx_eof)
  );

  for (genvar b = 0; b < NBANDS; b++) begin : g_band
    cplx_t        mix [NANT];
    cplx_t        bb  [NANT];
    logic         r_valid, r_last, r_done, r_sync, f_ready;
    logic [7:0]   r_data;
    logic [8:0]   f_out;
    logic [RAW:0] f_count;

    for (genvar a = 0; a < NANT; a++) begin : g_ant
      nco_mixer u_nco (.clk, .rst, .en(1'b1), .freq(rx_freq[b]), .din(adc[a]), .dout(mix[a]));
      lpf_cascade #(.STAGES(2)) u_lpf (.clk, .rst, .en(1'b1), .din(mix[a]), .dout(bb[a]));
    end

    rx_chain #(.MAX_LEN(MAX_LEN)) u_rx (
      .clk, .rst, .din(bb), .thr(rx_thr), .emin(rx_emin), .adapt(rx_adapt), .clear(rx_clear),
      .m_valid(r_valid), .m_data(r_data), .m_last(r_last), .stat(rx_stat[b]),
      .frame_done(r_done), .sync(r_sync)
    );

    sync_fifo #(.W(9), .DEPTH(RX_FIFO_DEPTH)) u_fifo (
      .clk, .rst, .s_valid(r_valid), .s_ready(f_ready), .s_data({r_last, r_data}),
      .m_valid(sw_valid[b]), .m_ready(sw_ready[b]), .m_data(f_out), .count(f_count)
    );
    assign sw_data[b] = f_out[7:0];
    assign sw_last[b] = f_out[8];

    // bytes arriving at a full FIFO are lost and counted
    always_ff @(posedge clk) begin
      if (rst || rx_clear) rx_drops[b] <= '0;
      else if (r_valid && !f_ready) rx_drops[b] <= rx_drops[b] + 1'b1;
    end
  end

  axis_switch #(.N(NBANDS), .W(8)) u_sw (
    .clk, .rst, .s_tvalid(sw_valid), .s_tready(sw_ready), .s_tdata(sw_data), .s_tlast(sw_last),
    .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready), .m_tdata(m_axis_tdata),
    .m_tlast(m_axis_tlast), .m_tid(m_axis_tid)
  );
endmodule
