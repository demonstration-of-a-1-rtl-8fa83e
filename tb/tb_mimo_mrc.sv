// tb_mimo_mrc: for random two-antenna gains g_r and random 16-QAM symbols
// s, sends x_r = g_r s / (3 QS) plus small noise and checks the combined
// output against a bit-exact model of z = (sum conj(g_r) x_r) inv >> 30,
// inv = floor(3 QS 2^30 / sum |g_r|^2), and that z is close to s. Also
// checks that nothing comes out while the divider is busy, that training
// symbols are not passed on, and that a new frame clears the gain.
module tb_mimo_mrc;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic gains_valid, sym_valid, out_valid, ready;
  cplx_t g [NANT], sym [NANT], z;
  phase_e sym_phase, out_phase;
  logic [15:0] sym_idx, out_idx;
  mimo_mrc dut (.clk, .rst, .gains_valid, .g, .sym_valid, .sym, .sym_phase, .sym_idx,
                .out_valid, .z, .out_phase, .out_idx, .ready);
  int checks = 0, failures = 0, outs = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic longint ab(input longint v);
    return v < 0 ? -v : v;
  endfunction
  function automatic int lvl();
    int v;
    v = int'($urandom_range(0, 3));
    return (2 * v - 3) * QS;
  endfunction
  always @(posedge clk) if (out_valid) outs++;
  initial begin
    longint inv, pwr, nre, nim, er, ei;
    int sr, si;
    gains_valid = 0; sym_valid = 0; g = '{default: '0}; sym = '{default: '0};
    sym_phase = PH_IDLE; sym_idx = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int f = 0; f < 12; f++) begin
      // new frame: first training symbol clears the gain
      sym_phase = PH_TR1; sym_idx = 0; sym_valid = 1;
      @(negedge clk);
      sym_valid = 0;
      check(!ready, "ready cleared by a new frame");
      for (int r = 0; r < NANT; r++) begin
        int mag;
        mag = (f % 3 == 0) ? 1500 : 7000;
        g[r] = '{16'(int'($urandom_range(0, 2 * mag)) - mag), 16'(int'($urandom_range(0, 2 * mag)) - mag)};
      end
      gains_valid = 1;
      @(negedge clk);
      gains_valid = 0;
      // a payload symbol while the divider runs must not come out
      outs = 0;
      sym_phase = PH_PAY; sym_valid = 1;
      @(negedge clk);
      sym_valid = 0;
      repeat (60) @(negedge clk);
      check(outs == 0, "no output while the divider is busy");
      check(ready, "ready after the division");
      pwr = 0;
      for (int r = 0; r < NANT; r++) pwr += longint'(g[r].re) * g[r].re + longint'(g[r].im) * g[r].im;
      if (pwr == 0) pwr = 1;
      inv = ((longint'(3 * QS)) <<< 30) / pwr;
      if (inv > 64'h1FFFFFF) inv = 64'h1FFFFFF;
      for (int n = 0; n < 60; n++) begin
        sr = lvl(); si = lvl();
        for (int r = 0; r < NANT; r++) begin
          longint xr, xi;
          xr = (longint'(g[r].re) * sr - longint'(g[r].im) * si) / (3 * QS) + int'($urandom_range(0, 6)) - 3;
          xi = (longint'(g[r].re) * si + longint'(g[r].im) * sr) / (3 * QS) + int'($urandom_range(0, 6)) - 3;
          sym[r] = '{16'(xr), 16'(xi)};
        end
        sym_phase = (n < 10) ? PH_PIL : ((n < 15) ? PH_TR2 : PH_PAY);
        sym_idx = 16'(n);
        sym_valid = 1;
        nre = 0; nim = 0;
        for (int r = 0; r < NANT; r++) begin
          nre += longint'(g[r].re) * sym[r].re + longint'(g[r].im) * sym[r].im;
          nim += longint'(g[r].re) * sym[r].im - longint'(g[r].im) * sym[r].re;
        end
        er = (nre * inv + (64'sd1 <<< 29)) >>> 30;
        ei = (nim * inv + (64'sd1 <<< 29)) >>> 30;
        @(negedge clk);
        sym_valid = 0;
        if (sym_phase == PH_TR2) check(!out_valid, "training symbols are not combined");
        else begin
          check(out_valid && out_phase == sym_phase && out_idx == 16'(n), "output valid and labels");
          check(longint'(z.re) == er && longint'(z.im) == ei, $sformatf("frame %0d sym %0d z=%0d,%0d model %0d,%0d", f, n, z.re, z.im, er, ei));
          check(ab(longint'(z.re) - sr) < 200 && ab(longint'(z.im) - si) < 200, $sformatf("frame %0d sym %0d z=%0d,%0d sent %0d,%0d", f, n, z.re, z.im, sr, si));
        end
      end
    end
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
