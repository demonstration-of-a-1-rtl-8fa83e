// tb_lpf_cascade: tones through the two-stage band filter. A complex tone
// inside the band (10 MHz at 200 MSps) must come out with its amplitude
// (within 1 %), tones in the neighbouring band (35 and -50 MHz) must be
// suppressed below 1 LSB-level residue (amplitude < 4), and the DC step
// response must settle to the input (unit DC gain). Throughout, every output
// sample is also compared with a bit-exact model of the two filters
// written here (round half up, shift by 15, saturate to 16 bits).
module tb_lpf_cascade;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  cplx_t din, dout;
  lpf_cascade dut (.clk, .rst, .en(1'b1), .din, .dout);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // bit-exact model of the cascade, one register per stage like the RTL
  import filt_coef_pkg::*;
  longint mdl [2][63][2];
  int     mout [2][2];
  int     mism = 0, mcmp = 0;
  function automatic int msat(input longint v);
    longint r;
    r = (v + (64'sd1 <<< 14)) >>> 15;
    if (r > 32767) return 32767;
    if (r < -32768) return -32768;
    return int'(r);
  endfunction
  always @(posedge clk) begin
    if (rst) begin
      mdl = '{default: 0}; mout = '{default: 0};
    end else begin
      int nin [2][2];
      nin[0] = '{int'(din.re), int'(din.im)};
      nin[1] = mout[0];
      for (int st = 0; st < 2; st++) begin
        for (int c = 0; c < 2; c++) begin
          longint acc;
          acc = 0;
          for (int k = 0; k < 63; k++) acc += longint'(LPF_COEF[k]) * mdl[st][k][c];
          mout[st][c] = msat(acc);
        end
        for (int k = 62; k > 0; k--) mdl[st][k] = mdl[st][k-1];
        mdl[st][0] = '{longint'(nin[st][0]), longint'(nin[st][1])};
      end
    end
  end
  always @(negedge clk) if (!rst) begin
    mcmp++;
    if (int'(dout.re) != mout[1][0] || int'(dout.im) != mout[1][1]) mism++;
    if (mcmp % 4 == 0) check(int'(dout.re) == mout[1][0] && int'(dout.im) == mout[1][1], "output matches the exact model");
  end
  function automatic real rabs(input real x);
    return x < 0.0 ? -x : x;
  endfunction
  task automatic tone(input real f_mhz, input real amp, output real out_amp);
    real pi, maxa, a;
    pi = 3.141592653589793;
    maxa = 0.0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      din = '{16'(int'(amp * $cos(2 * pi * f_mhz / 200.0 * n))), 16'(int'(amp * $sin(2 * pi * f_mhz / 200.0 * n)))};
      if (n > 300) begin
        a = $sqrt(real'(dout.re) ** 2 + real'(dout.im) ** 2);
        if (a > maxa) maxa = a;
      end
    end
    out_amp = maxa;
  endtask
  initial begin
    real a;
    din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    tone(10.0, 10000.0, a);
    check(rabs(a - 10000.0) < 100.0, $sformatf("in-band tone amplitude %f", a));
    tone(-15.0, 10000.0, a);
    check(rabs(a - 10000.0) < 100.0, $sformatf("in-band tone -15 MHz amplitude %f", a));
    tone(35.0, 20000.0, a);
    check(a < 4.0, $sformatf("35 MHz tone residue %f", a));
    tone(-50.0, 20000.0, a);
    check(a < 4.0, $sformatf("-50 MHz tone residue %f", a));
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      din = '{16'sd12345, -16'sd3000};
    end
    check(rabs(real'(dout.re) - 12345.0) <= 3.0 && rabs(real'(dout.im) + 3000.0) <= 3.0,
          $sformatf("DC gain: (%0d,%0d)", dout.re, dout.im));
    // full-scale random samples, including saturation
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      din = '{16'($urandom), 16'($urandom)};
    end
    check(mcmp > 4000 && mism == 0, $sformatf("%0d of %0d samples differ from the exact model", mism, mcmp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
