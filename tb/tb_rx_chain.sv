// tb_rx_chain: one transmitter (0 Hz carrier) and one band receiver joined
// by a 2x2 complex channel with a 0.25 echo one symbol later, a 3-sample
// propagation delay and uniform noise. Four frames of PRBS-15 payload are
// sent after a stretch of noise only. Checks: one acquisition per frame and
// none in the noise, every payload byte and m_last, CRC-good frame count,
// zero bit errors over all payload bits, EVM below 10 %, a measured noise
// power well under the signal power, the channel estimate against the
// channel used here, and silence after the last frame.
module tb_rx_chain;
  import mesh_pkg::*;
  localparam int LEN = 64;
  localparam int NFR = 4;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic s_valid, s_ready, fs, fe, ur, sof, eof, tx_en;
  logic [7:0] s_data;
  logic [15:0] seq;
  cplx_t dac [NANT], adc [NANT];
  logic m_valid, m_last, frame_done, sync;
  logic [7:0] m_data;
  rx_stat_t stat;
  tx_chain u_tx (.clk, .rst, .enable(tx_en), .pay_len(16'(LEN)), .gain(16'd4096), .freq(32'd0),
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready), .s_axis_tdata(s_data),
    .dac, .frame_start(fs), .frame_end(fe), .underrun(ur), .seq, .sym_sof(sof), .sym_eof(eof));
  rx_chain u_rx (.clk, .rst, .din(adc), .thr(8'd16), .emin(31'd2000000), .adapt(1'b1), .clear(1'b0),
    .m_valid, .m_data, .m_last, .stat, .frame_done, .sync);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [7:0] prbs_byte(input int k);
    logic [14:0] s;
    s = 15'h7FFF;
    for (int i = 0; i <= k; i++)
      for (int j = 0; j < 8; j++) s = {s[13:0], s[14] ^ s[13]};
    return s[7:0];
  endfunction
  logic [7:0] refp [LEN];
  initial for (int k = 0; k < LEN; k++) refp[k] = prbs_byte(k);
  // payload source
  int nsent = 0;
  always @(posedge clk) begin
    if (rst) begin
      s_valid <= 1'b0; s_data <= '0;
    end else begin
      if (s_valid && s_ready) nsent = nsent + 1;
      if (!(s_valid && !s_ready)) begin
        s_valid <= (nsent < NFR * LEN);
        s_data  <= refp[nsent % LEN];
      end
    end
  end
  // channel: adc[r] = sum_t H[r][t] (dac[t](n-3) + 0.25 dac[t](n-11)) + noise
  int hre [NANT][NANT] = '{'{13000, -7000}, '{9000, 12000}};
  int him [NANT][NANT] = '{'{-9000, 6000}, '{-4000, 8000}};
  cplx_t hist [NANT][12];
  int nz [NANT][2];
  always_ff @(posedge clk) begin
    for (int r = 0; r < NANT; r++)
      for (int c = 0; c < 2; c++) nz[r][c] <= int'($urandom_range(0, 62)) - 31;
    for (int t = 0; t < NANT; t++) begin
      hist[t][0] <= dac[t];
      for (int k = 1; k < 12; k++) hist[t][k] <= hist[t][k-1];
    end
  end
  always_comb begin
    for (int r = 0; r < NANT; r++) begin
      longint ar, ai;
      ar = 0; ai = 0;
      for (int t = 0; t < NANT; t++) begin
        longint xr, xi;
        xr = longint'(hist[t][2].re) + longint'(hist[t][10].re) / 4;
        xi = longint'(hist[t][2].im) + longint'(hist[t][10].im) / 4;
        ar += (hre[r][t] * xr - him[r][t] * xi);
        ai += (hre[r][t] * xi + him[r][t] * xr);
      end
      adc[r].re = 16'((ar >>> 15) + longint'(nz[r][0]));
      adc[r].im = 16'((ai >>> 15) + longint'(nz[r][1]));
    end
  end
  // output checks
  int nbytes = 0, nlast = 0, nsync = 0, ndone = 0, nbad_bytes = 0;
  always @(posedge clk) if (!rst) begin
    if (sync) nsync++;
    if (frame_done) ndone++;
    if (m_valid) begin
      if (m_data != refp[nbytes % LEN]) nbad_bytes++;
      if (m_last) begin
        nlast++;
        check(nbytes % LEN == LEN - 1, $sformatf("m_last on byte %0d", nbytes % LEN));
      end
      nbytes++;
    end
  end
  initial begin
    tx_en = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    // noise only: longer than the energy window, no detection allowed
    repeat (12000) @(negedge clk);
    check(nsync == 0, $sformatf("%0d acquisitions on noise", nsync));
    tx_en = 1;
    wait (nlast == NFR || ndone >= NFR + 2);
    tx_en = 0;
    repeat (6000) @(negedge clk);
    $display("syncs %0d ok %0d bad %0d ber %0d/%0d evm2 %0d sym %0d noise %0d",
             stat.syncs, stat.frames_ok, stat.frames_bad, stat.ber_errors, stat.ber_bits,
             stat.evm2, stat.sym_power, stat.noise_power);
    check(nsync == NFR && stat.syncs == NFR, $sformatf("%0d acquisitions", nsync));
    check(nbytes == NFR * LEN && nlast == NFR, $sformatf("%0d bytes, %0d packets", nbytes, nlast));
    check(nbad_bytes == 0, $sformatf("%0d wrong payload bytes", nbad_bytes));
    check(stat.frames_ok == NFR && stat.frames_bad == 0, "CRC-good frames");
    check(stat.ber_errors == 0 && stat.ber_bits == 32'(NFR * LEN * 8), "no bit errors");
    check(stat.evm2 < 32'd655, "EVM below 10 %");
    check(stat.noise_power * 100 < stat.sym_power, "noise power well under signal power");
    check(stat.last_crc_ok && stat.last_seq == 16'(NFR - 1) && stat.last_len == 16'(LEN), "last frame header");
    // h[r][t] is H[r][t] times the training amplitude (3 QS) times the
    // transmit and matched filter gain: compare phases via cross products
    for (int r = 0; r < NANT; r++)
      for (int t = 0; t < NANT; t++) begin
        longint er, ei, dot, crs;
        cplx_t hv;
        hv = stat.h[r * NANT + t];
        er = hv.re; ei = hv.im;
        dot = er * hre[r][t] + ei * him[r][t];
        crs = ei * hre[r][t] - er * him[r][t];
        check(dot > 0 && (crs < 0 ? -crs : crs) * 5 < dot, $sformatf("h[%0d][%0d] = %0d,%0d direction", r, t, er, ei));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
