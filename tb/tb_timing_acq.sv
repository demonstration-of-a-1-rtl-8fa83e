// tb_timing_acq: feeds a stream at one sample every two clocks whose real
// part is the sample index, with a synthetic triangular correlation peak
// at sample P and the flag raised around it. The acquired symbols must be
// the samples P + OSR (k + 1), labelled 64 TR1, 64 TR2, 32 pilots and then
// payload symbols until frame_done; nothing may follow frame_done, and the
// unit must re-acquire a second frame at a different peak.
module tb_timing_acq;
  import mesh_pkg::*;
  localparam int OSR = 4;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic valid, flag, frame_done, sym_valid, sync, busy;
  logic [29:0] metric;
  cplx_t din [NANT], sym [NANT];
  phase_e sym_phase;
  logic [15:0] sym_idx;
  timing_acq dut (
    .clk, .rst, .valid, .metric, .flag, .din, .frame_done,
    .sym_valid, .sym, .sym_phase, .sym_idx, .sync, .busy);
  int checks = 0, failures = 0;
  int n = 0, peak = 0, k = 0, syncs = 0, after_done = 0, npay = 50;
  bit done_sent = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // monitor
  always @(posedge clk) if (!rst) begin
    if (sync) syncs++;
    if (sym_valid) begin
      phase_e eph;
      int eidx;
      if (done_sent) after_done++;
      if (k < TRAIN_LEN) begin eph = PH_TR1; eidx = k; end
      else if (k < 2 * TRAIN_LEN) begin eph = PH_TR2; eidx = k - TRAIN_LEN; end
      else if (k < 2 * TRAIN_LEN + PILOT_LEN) begin eph = PH_PIL; eidx = k - 2 * TRAIN_LEN; end
      else begin eph = PH_PAY; eidx = k - 2 * TRAIN_LEN - PILOT_LEN; end
      check(int'(sym[0].re) == peak + OSR * (k + 1), $sformatf("symbol %0d is sample %0d, expected %0d", k, sym[0].re, peak + OSR * (k + 1)));
      check(int'(sym[1].im) == -(peak + OSR * (k + 1)), "antenna 2 sample");
      check(sym_phase == eph && int'(sym_idx) == eidx, $sformatf("symbol %0d label %s/%0d", k, sym_phase.name(), sym_idx));
      k++;
    end
  end
  task automatic run_frame(input int p, input int len);
    peak = p; k = 0; done_sent = 0;
    for (int i = 0; i < p + OSR * (2 * TRAIN_LEN + PILOT_LEN + len + 40); i++) begin
      int d;
      d = (n % 20000) - p;
      d = d < 0 ? -d : d;
      metric = (d < 10) ? 30'(1000 - 100 * d + int'($urandom_range(0, 20))) : 30'($urandom_range(0, 50));
      flag = (d <= 4) && !busy;
      din[0] = '{16'(n % 20000), 16'(0)};
      din[1] = '{16'(0), 16'(-(n % 20000))};
      valid = 1;
      @(negedge clk);
      valid = 0; flag = 0;
      if (k == 2 * TRAIN_LEN + PILOT_LEN + len && !done_sent) begin
        frame_done = 1; done_sent = 1;
      end
      @(negedge clk);
      frame_done = 0;
      n++;
    end
  endtask
  initial begin
    valid = 0; flag = 0; frame_done = 0; metric = '0; din = '{default: '0};
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    run_frame(300, npay);
    check(k == 2 * TRAIN_LEN + PILOT_LEN + npay, $sformatf("frame 1: %0d symbols", k));
    check(!busy, "idle after frame_done");
    n = 0;
    run_frame(777, 20);
    check(k == 2 * TRAIN_LEN + PILOT_LEN + 20, $sformatf("frame 2: %0d symbols", k));
    check(syncs == 2, $sformatf("%0d sync pulses", syncs));
    check(after_done == 0, "no symbols after frame_done");
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
