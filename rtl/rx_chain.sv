// rx_chain: receiver of one band (one remote node), both antennas, from the
// band-filtered baseband to payload bytes and link metrics.
//
// Per antenna at the full sample rate (8 samples per symbol): input power
// meter, SRRC matched filter. Then an energy detector over both antennas,
// decimation by 2 to 4 samples per symbol, the Golay correlator with its
// adaptive threshold, and timing acquisition, which emits symbol-spaced
// samples tagged with their frame section. Channel gain estimation on the
// two training intervals feeds maximum-ratio combining; an LMS equalizer
// (trained on the pilots, then decision directed) follows, then the
// 16-QAM demapper, the data deframer (bytes out, CRC check) and the
// monitors: symbol power and noise meters (pre-detection SINR), per-frame
// EVM and PRBS bit error counting over the payload. The chain and its order
// follow the paper's receiver diagram; the equalizer is placed after MRC as
// the paper's text says. Payload bytes come out at most one per 2 symbols,
// without back-pressure.
//
// Note: the meters' result strobes, the divider busy flag, the timing
// unit's busy flag, the combiner's ready flag, the equalizer
// error and the symbol index after the demapper are left unconnected here;
// the statistics registers simply hold each meter's latest result.
module rx_chain
  import mesh_pkg::*;
#(
  parameter int DS       = SPS / 4,
  parameter int MAX_LEN  = 8192
) (
  input  logic        clk,
  input  logic        rst,
  input  cplx_t       din [NANT],     // band at 0 Hz, one sample per clock
  input  logic [7:0]  thr,            // detection threshold (see gs_correlator)
  input  logic [30:0] emin,           // minimum energy for detection
  input  logic        adapt,          // LMS adaptation on
  input  logic        clear,          // clear meters and counters
  output logic        m_valid,
  output logic [7:0]  m_data,
  output logic        m_last,
  output rx_stat_t    stat,
  output logic        frame_done,
  output logic        sync
);
  localparam int OSR = SPS / DS;
  localparam int EW  = 31;
  localparam int DW  = NANT * 2 * SW + EW;

  cplx_t        mf [NANT];
  logic [EW-1:0] en_full;
  logic [DW-1:0] ds_in, ds_out;
  logic         ds_valid;
  cplx_t        ds_x [NANT];
  logic [EW-1:0] ds_e;
  logic         c_valid, c_flag;
  logic [29:0]  c_metric;
  cplx_t        c_x [NANT];
  logic         t_valid, t_busy;
  cplx_t        t_sym [NANT];
  phase_e       t_phase;
  logic [15:0]  t_idx;
  logic [$clog2(TRAIN_LEN)-1:0] ce_addr, eq_addr_a, eq_addr_b;
  logic         ce_bit, eq_bit_a, eq_bit_b, unused_bit;
  logic         g_valid;
  cplx_t        g [NANT];
  cplx_t        h [NANT][NANT];
  logic         z_valid, mrc_ready;
  cplx_t        z;
  phase_e       z_phase;
  logic [15:0]  z_idx;
  logic         y_valid;
  cplx_t        y, y_err;
  phase_e       y_phase;
  logic [15:0]  y_idx;
  logic         d_valid;
  logic [3:0]   d_bits;
  cplx_t        d_dec, d_y;
  phase_e       d_phase;
  logic [15:0]  d_idx;
  logic         pay_gate;
  logic         ip_valid [NANT];
  logic         sp_valid, np_valid, evm_valid, evm_busy;
  logic         crc_ok;

  for (genvar a = 0; a < NANT; a++) begin : g_ant
    power_meter #(.LOG_N(6)) u_pin (
      .clk, .rst, .clear, .valid(1'b1), .gate(1'b1), .din(din[a]),
      .power(stat.in_power[a]), .power_valid(ip_valid[a])
    );
    srrc_filter #(.SHIFT(18)) u_mf (.clk, .rst, .en(1'b1), .din(din[a]), .dout(mf[a]));
    assign ds_in[a*2*SW +: 2*SW] = mf[a];
    assign ds_x[a] = ds_out[a*2*SW +: 2*SW];
  end

  energy_detector #(.LOG_W(12)) u_ed (.clk, .rst, .en(1'b1), .din(mf), .energy(en_full));
  assign ds_in[DW-1 -: EW] = en_full;
  assign ds_e = ds_out[DW-1 -: EW];

  // the energy register lags the filter output by one clock; both are
  // sampled together, which is immaterial for a 4096-sample window
  downsampler #(.W(DW), .FACTOR(DS)) u_ds (
    .clk, .rst, .en(1'b1), .din(ds_in), .out_valid(ds_valid), .dout(ds_out)
  );

  gs_correlator #(.OSR(OSR), .EW(EW), .MW(30)) u_gs (
    .clk, .rst, .valid(ds_valid), .din(ds_x), .energy(ds_e), .thr, .emin,
    .out_valid(c_valid), .metric(c_metric), .flag(c_flag), .x_out(c_x)
  );

  timing_acq #(.OSR(OSR), .MW(30), .SEARCH(2 * OSR + 2), .DLY(2 * OSR + 8)) u_ta (
    .clk, .rst, .valid(c_valid), .metric(c_metric), .flag(c_flag), .din(c_x),
    .frame_done, .sym_valid(t_valid), .sym(t_sym), .sym_phase(t_phase), .sym_idx(t_idx),
    .sync, .busy(t_busy)
  );

  training_lut u_tlut_ce (.addr_a(ce_addr), .bit_a(ce_bit), .addr_b('0), .bit_b(unused_bit));
  training_lut u_tlut_eq (.addr_a(eq_addr_a), .bit_a(eq_bit_a), .addr_b(eq_addr_b), .bit_b(eq_bit_b));

  chan_est u_ce (
    .clk, .rst, .sym_valid(t_valid), .sym(t_sym), .sym_phase(t_phase), .sym_idx(t_idx),
    .tr_addr(ce_addr), .tr_bit(ce_bit), .gains_valid(g_valid), .g, .h
  );

  mimo_mrc u_mrc (
    .clk, .rst, .gains_valid(g_valid), .g, .sym_valid(t_valid), .sym(t_sym),
    .sym_phase(t_phase), .sym_idx(t_idx), .out_valid(z_valid), .z, .out_phase(z_phase),
    .out_idx(z_idx), .ready(mrc_ready)
  );

  lms_equalizer #(.NT(5), .MU_SHIFT(18)) u_eq (
    .clk, .rst, .sync, .adapt, .in_valid(z_valid), .z, .in_phase(z_phase), .in_idx(z_idx),
    .tr_addr_a(eq_addr_a), .tr_addr_b(eq_addr_b), .tr_bit_a(eq_bit_a), .tr_bit_b(eq_bit_b),
    .out_valid(y_valid), .y, .out_phase(y_phase), .out_idx(y_idx), .err(y_err)
  );

  qam_demapper u_dm (
    .clk, .rst, .in_valid(y_valid), .y, .in_phase(y_phase), .in_idx(y_idx),
    .out_valid(d_valid), .bits(d_bits), .dec(d_dec), .y_out(d_y), .out_phase(d_phase), .out_idx(d_idx)
  );

  rx_deframer #(.MAX_LEN(MAX_LEN)) u_df (
    .clk, .rst, .sync, .in_valid(d_valid), .nib(d_bits), .in_phase(d_phase),
    .pay_gate, .m_valid, .m_data, .m_last, .frame_done, .crc_ok,
    .hdr_len(stat.last_len), .hdr_seq(stat.last_seq), .frames_ok(stat.frames_ok), .frames_bad(stat.frames_bad)
  );

  power_meter #(.LOG_N(6)) u_psym (
    .clk, .rst, .clear, .valid(d_valid), .gate(pay_gate), .din(d_y),
    .power(stat.sym_power), .power_valid(sp_valid)
  );
  noise_meter #(.LOG_N(6)) u_noise (
    .clk, .rst, .clear, .valid(d_valid), .gate(pay_gate), .y(d_y), .d(d_dec),
    .noise(stat.noise_power), .noise_valid(np_valid)
  );
  evm_meter u_evm (
    .clk, .rst, .valid(d_valid), .gate(pay_gate), .frame_end(frame_done), .y(d_y), .d(d_dec),
    .evm2(stat.evm2), .evm_valid, .busy(evm_busy)
  );
  ber_counter u_ber (
    .clk, .rst, .clear, .restart(sync), .valid(d_valid), .gate(pay_gate), .nib(d_bits),
    .errors(stat.ber_errors), .bits(stat.ber_bits)
  );

  always_ff @(posedge clk) begin
    if (rst || clear) stat.syncs <= '0;
    else if (sync) stat.syncs <= stat.syncs + 1'b1;
  end
  always_ff @(posedge clk) begin
    if (rst) stat.last_crc_ok <= 1'b0;
    else if (frame_done) stat.last_crc_ok <= crc_ok;
  end
  for (genvar r = 0; r < NANT; r++) begin : g_h
    for (genvar t = 0; t < NANT; t++) begin : g_t
      assign stat.h[r*NANT+t] = h[r][t];
    end
  end
endmodule
