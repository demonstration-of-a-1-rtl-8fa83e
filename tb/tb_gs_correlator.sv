// tb_gs_correlator: sends noise, then the 512-chip preamble at 4 samples per
// chip (each chip held for 4 samples, rotated by a fixed complex channel on
// antenna 2), then noise again. At every sample the correlator output is
// compared with a direct 512-term correlation computed here (|Re|+|Im|
// summed over the antennas); the flag must be raised at the preamble end
// and nowhere else; the threshold rule is re-evaluated here from a 4096-
// sample energy sum built the same way as the energy detector's.
module tb_gs_correlator;
  import mesh_pkg::*;
  localparam int OSR = 4;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic valid, out_valid, flag;
  cplx_t din [NANT], x_out [NANT];
  logic [30:0] energy;
  logic [29:0] metric;
  gs_correlator dut (.clk, .rst, .valid, .din, .energy, .thr(8'd16), .emin(31'd1000000),
    .out_valid, .metric, .flag, .x_out);
  localparam logic [PRE_LEN-1:0] A = golay_a(PRE_LEN);
  int checks = 0, failures = 0, flags_at_peak = 0, false_flags = 0;
  cplx_t hist [NANT][$];
  int ehist [$];
  longint esum = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic longint ab(input longint v);
    return v < 0 ? -v : v;
  endfunction
  initial begin
    int nsamp, peak_n;
    longint m, cr, ci;
    valid = 0; din = '{default: '0}; energy = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    nsamp = 3000 + PRE_LEN * OSR + 500;
    peak_n = 3000 + PRE_LEN * OSR - OSR;   // sample of the last chip
    for (int n = 0; n < nsamp; n++) begin
      int chip, nr, ni;
      chip = 0;
      if (n >= 3000 && n < 3000 + PRE_LEN * OSR) chip = A[PRE_LEN - 1 - (n - 3000) / OSR] ? 4000 : -4000;
      nr = int'($urandom_range(0, 400)) - 200; ni = int'($urandom_range(0, 400)) - 200;
      din[0] = '{16'(chip + nr), 16'(ni)};
      din[1] = '{16'((chip * 3) / 5 + ni), 16'((-chip * 4) / 5 + nr)};
      // energy as the detector computes it: 4096-sample sum of |Re|+|Im|
      begin
        int t;
        t = 0;
        for (int a = 0; a < NANT; a++) t += int'(ab(din[a].re) + ab(din[a].im));
        ehist.push_back(t);
        esum += t;
        if (ehist.size() > 4096) esum -= ehist.pop_front();
        energy = 31'(esum);
      end
      for (int a = 0; a < NANT; a++) begin
        hist[a].push_front(din[a]);
        if (hist[a].size() > PRE_LEN * OSR) void'(hist[a].pop_back());
      end
      m = 0;
      for (int a = 0; a < NANT; a++) begin
        cr = 0; ci = 0;
        for (int j = 0; j < PRE_LEN; j++)
          if (j * OSR < hist[a].size()) begin
            cr += A[j] ? longint'(hist[a][j * OSR].re) : -longint'(hist[a][j * OSR].re);
            ci += A[j] ? longint'(hist[a][j * OSR].im) : -longint'(hist[a][j * OSR].im);
          end
        m += ab(cr) + ab(ci);
      end
      valid = 1;
      @(negedge clk);
      valid = 0;
      check(out_valid && longint'(metric) == m, $sformatf("n=%0d metric %0d expected %0d", n, metric, m));
      check(flag == ((m * 128 >= 16 * longint'(energy)) && energy >= 1000000), $sformatf("n=%0d flag rule", n));
      if (flag && (n >= peak_n - 1 && n <= peak_n + 1)) flags_at_peak++;
      if (flag && (n < 3000 + PRE_LEN * OSR / 2 || n > peak_n + OSR)) begin false_flags++; if (false_flags < 6) $display("flag at %0d (peak %0d) m=%0d", n, peak_n, m); end
      @(negedge clk);
    end
    check(flags_at_peak > 0, "preamble detected at its end");
    check(false_flags == 0, $sformatf("%0d false detections", false_flags));
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
