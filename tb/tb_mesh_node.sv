// tb_mesh_node: end-to-end test of one node at its default parameters.
//
// The node's own two transmit antennas are looped back to its two receive
// antennas through a 2x2 complex channel with a one-symbol echo and uniform
// noise. The transmitter sits at +25 MHz; receive bands 0 and 1 are both
// tuned to it (so both decode every frame and the AXI4-Stream switch has
// to arbitrate), band 2 to -75 MHz, where nothing is sent. The payload is
// the PRBS-15 pattern restarted per frame, so the bit error counters and the
// byte-exact comparison of every packet at the output both apply. The DMA
// output is randomly stalled. Checks: every packet's bytes, length and band
// tag; CRC, BER and EVM counters; and that each mechanism (frame
// transmission, preamble acquisition, switch hand-over between bands,
// output stall, LMS adaptation, silent band) happened.
module tb_mesh_node;
  import mesh_pkg::*;

  localparam int LEN     = 48;
  localparam int NFRAMES = 3;

  logic clk = 1'b0, rst = 1'b1;
  always #2.5 clk = ~clk;

  logic        s_valid, s_ready, m_valid, m_ready, m_last;
  logic [7:0]  s_data, m_data;
  logic [1:0]  m_tid;
  logic [31:0] rx_freq [NBANDS];
  cplx_t       dac [NANT], adc [NANT];
  logic        tx_fs, tx_fe, tx_ur;
  logic [15:0] tx_seq;
  rx_stat_t    stat [NBANDS];
  logic [31:0] drops [NBANDS];

  mesh_node dut (
    .clk, .rst, .tx_enable(1'b1), .tx_pay_len(16'(LEN)), .tx_gain(16'd4096),
    .tx_freq(32'h2000_0000), .rx_freq, .rx_thr(8'd16), .rx_emin(31'd2000000),
    .rx_adapt(1'b1), .rx_clear(1'b0),
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready), .s_axis_tdata(s_data),
    .dac, .adc,
    .m_axis_tvalid(m_valid), .m_axis_tready(m_ready), .m_axis_tdata(m_data),
    .m_axis_tlast(m_last), .m_axis_tid(m_tid),
    .tx_frame_start(tx_fs), .tx_frame_end(tx_fe), .tx_underrun(tx_ur), .tx_seq,
    .rx_stat(stat), .rx_drops(drops)
  );

  assign rx_freq[0] = 32'hE000_0000;   // -25 MHz
  assign rx_freq[1] = 32'hE000_0000;
  assign rx_freq[2] = 32'hA000_0000;   // -75 MHz

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference payload: PRBS-15 bytes, restarted every frame
  function automatic logic [7:0] prbs_byte(input int k);
    logic [14:0] s;
    s = PRBS_SEED;
    for (int i = 0; i <= k; i++) s = prbs15_step8(s);
    return s[7:0];
  endfunction
  logic [7:0] refp [LEN];
  initial for (int k = 0; k < LEN; k++) refp[k] = prbs_byte(k);

  // payload source
  int sent_bytes = 0;
  always_ff @(posedge clk) begin
    if (rst) begin
      s_valid <= 1'b0; s_data <= '0; sent_bytes <= 0;
    end else begin
      if (s_valid && s_ready) sent_bytes <= sent_bytes + 1;
      if (!(s_valid && !s_ready)) begin
        int nb;
        nb = sent_bytes + ((s_valid && s_ready) ? 1 : 0);
        s_valid <= (nb < NFRAMES * LEN);
        s_data  <= refp[nb % LEN];
      end
    end
  end

  // channel: adc[r] = sum_t H[r][t] (dac[t](n) + 0.15 dac[t](n-8)) + noise
  int hre [NANT][NANT] = '{'{16384, 9830}, '{-6554, 14746}};
  int him [NANT][NANT] = '{'{3277, -6554}, '{13107, 0}};
  cplx_t hist [NANT][9];
  int nz [NANT][2];          // uniform noise, +-31 per component
  always_ff @(posedge clk) begin
    for (int r = 0; r < NANT; r++)
      for (int c = 0; c < 2; c++) nz[r][c] <= int'($urandom_range(0, 62)) - 31;
    for (int t = 0; t < NANT; t++) begin
      hist[t][0] <= dac[t];
      for (int k = 1; k < 9; k++) hist[t][k] <= hist[t][k-1];
    end
  end
  always_comb begin
    for (int r = 0; r < NANT; r++) begin
      longint ar, ai;
      ar = 0; ai = 0;
      for (int t = 0; t < NANT; t++) begin
        longint xr, xi;
        xr = longint'(hist[t][0].re) + (longint'(hist[t][8].re) * 15) / 100;
        xi = longint'(hist[t][0].im) + (longint'(hist[t][8].im) * 15) / 100;
        ar += (hre[r][t] * xr - him[r][t] * xi);
        ai += (hre[r][t] * xi + him[r][t] * xr);
      end
      adc[r].re = 16'((ar >>> 15) + longint'(nz[r][0]));
      adc[r].im = 16'((ai >>> 15) + longint'(nz[r][1]));
    end
  end

  // output sink with random stalls
  int pkt_bytes = 0, pkts [NBANDS], stalls = 0, handovers = 0, last_tid = -1;
  initial foreach (pkts[i]) pkts[i] = 0;
  always_ff @(posedge clk) begin
    if (rst) m_ready <= 1'b0;
    else m_ready <= ($urandom_range(0, 3) != 0);
    if (!rst && m_valid && !m_ready) stalls++;
    if (!rst && m_valid && m_ready) begin
      check(m_data == refp[pkt_bytes], $sformatf("byte %0d of packet from band %0d: %h vs %h",
            pkt_bytes, m_tid, m_data, refp[pkt_bytes]));
      check(m_last == (pkt_bytes == LEN - 1), "tlast position");
      if (m_last) begin
        pkt_bytes = 0;
        pkts[m_tid]++;
        if (last_tid != -1 && last_tid != int'(m_tid)) handovers++;
        last_tid = int'(m_tid);
      end else pkt_bytes++;
    end
  end

  int tx_frames = 0;
  always_ff @(posedge clk) if (!rst && tx_fe) tx_frames++;

  initial begin
    repeat (10) @(posedge clk);
    rst = 1'b0;
    wait (tx_frames == NFRAMES);
    repeat (8000) @(posedge clk);
    for (int b = 0; b < NBANDS; b++)
      $display("band %0d: syncs %0d ok %0d bad %0d ber %0d/%0d evm2 %0d pwr %0d noise %0d pkts %0d inpow %0d/%0d",
               b, stat[b].syncs, stat[b].frames_ok, stat[b].frames_bad, stat[b].ber_errors,
               stat[b].ber_bits, stat[b].evm2, stat[b].sym_power, stat[b].noise_power, pkts[b],
               stat[b].in_power[0], stat[b].in_power[1]);
    check(tx_frames == NFRAMES, "frames transmitted");
    for (int b = 0; b < 2; b++) begin
      check(stat[b].syncs == NFRAMES, $sformatf("band %0d acquisitions", b));
      check(stat[b].frames_ok == NFRAMES, $sformatf("band %0d CRC-good frames", b));
      check(stat[b].frames_bad == 0, $sformatf("band %0d bad frames", b));
      check(stat[b].ber_bits == NFRAMES * LEN * 8, $sformatf("band %0d BER bits", b));
      check(stat[b].ber_errors == 0, $sformatf("band %0d bit errors", b));
      check(stat[b].evm2 < 32'd655, $sformatf("band %0d EVM below 10%%", b));
      check(pkts[b] == NFRAMES, $sformatf("band %0d packets delivered", b));
      check(stat[b].last_seq == 16'(NFRAMES - 1), $sformatf("band %0d header sequence", b));
    end
    check(stat[2].syncs == 0, "silent band stays silent");
    check(pkts[2] == 0, "silent band delivers nothing");
    check(!tx_ur, "no transmit underrun");
    // mechanisms
    $display("mechanisms: tx_frames %0d syncs %0d handovers %0d stalls %0d", tx_frames,
             stat[0].syncs + stat[1].syncs, handovers, stalls);
    check(handovers > 0, "switch hand-over between bands happened");
    check(stalls > 0, "output stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
