// tb_tx_chain: streams PRBS payload bytes into the transmitter (0 Hz
// carrier, unit gain) for three frames and checks the frame strobes and
// sequence numbers, the frame length in samples (sym_sof to sym_eof), that
// the MIMO training is sent from one antenna at a time (antenna 2 quiet
// during TR1, antenna 1 quiet during TR2), that both antennas carry the
// data section, that the output is silent between frames and that the
// payload FIFO never underruns.
module tb_tx_chain;
  import mesh_pkg::*;
  localparam int LEN = 40;
  localparam int NFR = 3;
  localparam int FSYMS = PRE_LEN + 2 * TRAIN_LEN + PILOT_LEN + HDR_SYMS + 2 * LEN + CRC_SYMS;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic s_valid, s_ready, fs, fe, ur, sof, eof;
  logic [7:0] s_data;
  logic [15:0] seq;
  cplx_t dac [NANT];
  tx_chain dut (.clk, .rst, .enable(1'b1), .pay_len(16'(LEN)), .gain(16'd4096), .freq(32'd0),
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready), .s_axis_tdata(s_data),
    .dac, .frame_start(fs), .frame_end(fe), .underrun(ur), .seq, .sym_sof(sof), .sym_eof(eof));
  int checks = 0, failures = 0;
  int nsent = 0, nfs = 0, nfe = 0, nur = 0, t = 0, t_sof = -1;
  longint e_tr1 [NANT], e_tr2 [NANT], e_pay [NANT], e_idle;
  int ntr = 0, npay = 0, nidle = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic longint mag(input cplx_t x);
    return longint'(x.re) * x.re + longint'(x.im) * x.im;
  endfunction
  always @(posedge clk) begin
    if (rst) begin
      s_valid <= 1'b0; s_data <= '0;
    end else begin
      if (s_valid && s_ready) nsent = nsent + 1;
      if (!(s_valid && !s_ready)) begin
        s_valid <= (nsent < NFR * LEN);
        s_data  <= 8'(nsent * 7);
      end
    end
  end
  always @(posedge clk) if (!rst) begin
    t++;
    if (fs) begin
      check(int'(seq) == nfs, $sformatf("frame %0d has seq %0d", nfs, seq));
      nfs++;
    end
    if (fe) nfe++;
    if (ur) nur++;
    if (sof) t_sof = t;
    if (eof) check(t - t_sof == (FSYMS - 1) * SPS, $sformatf("frame spans %0d samples, expected %0d", t - t_sof, (FSYMS - 1) * SPS));
    if (t_sof >= 0) begin
      int s;
      s = t - t_sof;   // filter delay is well under 8 symbols, windows keep clear
      if (s >= (PRE_LEN + 8) * SPS && s < (PRE_LEN + TRAIN_LEN - 8) * SPS)
        for (int a = 0; a < NANT; a++) e_tr1[a] += mag(dac[a]);
      if (s >= (PRE_LEN + TRAIN_LEN + 8) * SPS && s < (PRE_LEN + 2 * TRAIN_LEN - 8) * SPS) begin
        for (int a = 0; a < NANT; a++) e_tr2[a] += mag(dac[a]);
        ntr++;
      end
      if (s >= (PRE_LEN + 2 * TRAIN_LEN + PILOT_LEN + 8) * SPS && s < (FSYMS - 8) * SPS) begin
        for (int a = 0; a < NANT; a++) e_pay[a] += mag(dac[a]);
        npay++;
      end
    end
  end
  initial begin
    e_tr1 = '{default: 0}; e_tr2 = '{default: 0}; e_pay = '{default: 0}; e_idle = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    wait (nfe == NFR);
    repeat (200) @(negedge clk);
    for (int k = 0; k < 2000; k++) begin
      for (int a = 0; a < NANT; a++) e_idle += mag(dac[a]);
      @(negedge clk);
    end
    check(nfs == NFR && nfe == NFR, $sformatf("%0d starts, %0d ends", nfs, nfe));
    check(nur == 0, "no underrun");
    check(e_tr1[1] * 1000 < e_tr1[0], "antenna 2 quiet during TR1");
    check(e_tr2[0] * 1000 < e_tr2[1], "antenna 1 quiet during TR2");
    check(e_tr1[0] / ntr > 1000000, "TR1 sent on antenna 1");
    check(e_pay[0] / npay > 1000000 && e_pay[1] / npay > 1000000, "data on both antennas");
    check(e_idle == 0, "silent after the last frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
