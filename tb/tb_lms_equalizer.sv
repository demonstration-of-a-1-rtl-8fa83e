// tb_lms_equalizer: frame 1 passes 32 QPSK pilots and 1500 random 16-QAM
// symbols through a symbol-spaced ISI channel z(n) = s(n) + (0.2+0.1j)
// s(n-1) + small noise with adaptation on; the equalizer must converge
// (residual error well below the unequalized ISI) with every late decision
// correct, and every output must carry the label of the symbol it belongs
// to. Frame 2 (after sync, adapt off) must reproduce its input exactly,
// i.e. sync restores the unit centre tap.
module tb_lms_equalizer;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic sync, adapt, in_valid, out_valid, tr_bit_a, tr_bit_b;
  cplx_t z, y, err;
  phase_e in_phase, out_phase;
  logic [15:0] in_idx, out_idx;
  logic [$clog2(TRAIN_LEN)-1:0] tr_addr_a, tr_addr_b;
  lms_equalizer dut (.clk, .rst, .sync, .adapt, .in_valid, .z, .in_phase, .in_idx,
    .tr_addr_a, .tr_addr_b, .tr_bit_a, .tr_bit_b, .out_valid, .y, .out_phase, .out_idx, .err);
  training_lut u_lut (.addr_a(tr_addr_a), .bit_a(tr_bit_a), .addr_b(tr_addr_b), .bit_b(tr_bit_b));
  localparam logic [TRAIN_LEN-1:0] TB = training_bits();
  localparam int NPAY = 1500;
  int checks = 0, failures = 0;
  int sre [2][$], sim [2][$], zre [$], zim [$];
  int frame = 0, nout = 0, bad_late = 0;
  longint e_first = 0, e_last = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int lvl();
    return (2 * int'($urandom_range(0, 3)) - 3) * QS;
  endfunction
  function automatic int slice(input int v);
    if (v < -2 * QS) return -3 * QS;
    if (v < 0) return -QS;
    if (v < 2 * QS) return QS;
    return 3 * QS;
  endfunction
  always @(posedge clk) if (!rst && out_valid) begin
    int k, er, ei;
    k = (out_phase == PH_PIL) ? int'(out_idx) : PILOT_LEN + int'(out_idx);
    check(k == nout, $sformatf("output %0d carries label of symbol %0d", nout, k));
    if (frame == 0) begin
      er = int'(y.re) - sre[0][k]; ei = int'(y.im) - sim[0][k];
      if (k >= PILOT_LEN && k < PILOT_LEN + 200) e_first += er * er + ei * ei;
      if (k >= PILOT_LEN + NPAY - 400) begin
        e_last += er * er + ei * ei;
        if (slice(y.re) != sre[0][k] || slice(y.im) != sim[0][k]) bad_late++;
      end
    end else begin
      check(int'(y.re) == zre[k] && int'(y.im) == zim[k], $sformatf("frame 2 symbol %0d not passed unchanged", k));
    end
    nout++;
  end
  task automatic send(input int f, input int k, input int r, input int i);
    z = '{16'(r), 16'(i)};
    in_phase = (k < PILOT_LEN) ? PH_PIL : PH_PAY;
    in_idx = (k < PILOT_LEN) ? 16'(k) : 16'(k - PILOT_LEN);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    repeat (2) @(negedge clk);
  endtask
  initial begin
    sync = 0; adapt = 1; in_valid = 0; z = '0; in_phase = PH_IDLE; in_idx = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int f = 0; f < 2; f++) begin
      frame = f; nout = 0;
      adapt = (f == 0);
      sync = 1;
      @(negedge clk);
      sync = 0;
      for (int k = 0; k < PILOT_LEN + NPAY; k++) begin
        int r, i, pr, pi;
        if (k < PILOT_LEN) begin
          r = TB[2 * k] ? 3 * QS : -3 * QS;
          i = TB[2 * k + 1] ? 3 * QS : -3 * QS;
        end else begin
          r = lvl(); i = lvl();
        end
        sre[f].push_back(r); sim[f].push_back(i);
        if (f == 0) begin
          pr = (k > 0) ? sre[f][k-1] : 0;
          pi = (k > 0) ? sim[f][k-1] : 0;
          send(f, k, r + (2 * pr - pi) / 10 + int'($urandom_range(0, 40)) - 20,
                     i + (2 * pi + pr) / 10 + int'($urandom_range(0, 40)) - 20);
        end else begin
          zre.push_back(r / 2 + 7); zim.push_back(i / 3 - 5);
          send(f, k, r / 2 + 7, i / 3 - 5);
        end
      end
      check(nout == PILOT_LEN + NPAY - 2, $sformatf("frame %0d: %0d outputs", f, nout));
      if (f == 0) begin
        $display("mean |e|^2 first 200 data symbols %0d, last 400 %0d", e_first / 200, e_last / 400);
        check(e_last / 400 * 20 < e_first / 200, "equalizer converged");
        check(e_last / 400 < 150 * 150, "residual error small");
        check(bad_late == 0, $sformatf("%0d wrong decisions after convergence", bad_late));
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
