// tb_mimo_tx: drives every frame section and checks what each antenna
// sends: the preamble chip (from the preamble table, checked against the
// time-reversed Golay sequence recomputed here) on both antennas, training
// on antenna 1 only then antenna 2 only, data on both, silence when idle.
module tb_mimo_tx;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic in_valid, out_valid, pre_chip;
  phase_e in_phase, out_phase;
  logic [15:0] in_idx;
  cplx_t in_sym, out_ant [NANT];
  logic [8:0] pre_addr;
  mimo_tx dut (.clk, .rst, .in_valid, .in_phase, .in_idx, .in_sym, .pre_addr, .pre_chip,
               .out_valid, .out_phase, .out_ant);
  preamble_lut u_lut (.addr(pre_addr), .chip(pre_chip));
  int checks = 0, failures = 0;
  int a [512], b [512], na [512], nb [512];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic step(input phase_e p, input int i, input int sre, input int sim,
                      input int e0r, input int e0i, input int e1r, input int e1i);
    @(negedge clk);
    in_valid = 1; in_phase = p; in_idx = 16'(i); in_sym = '{16'(sre), 16'(sim)};
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_phase == p, "valid and phase one clock later");
    check(int'(out_ant[0].re) == e0r && int'(out_ant[0].im) == e0i &&
          int'(out_ant[1].re) == e1r && int'(out_ant[1].im) == e1i,
          $sformatf("phase %0d idx %0d: ant0 (%0d,%0d) ant1 (%0d,%0d)", p, i,
                    out_ant[0].re, out_ant[0].im, out_ant[1].re, out_ant[1].im));
  endtask
  initial begin
    int len;
    a[0] = 1; b[0] = 1; len = 1;
    while (len < 512) begin
      for (int i = 0; i < len; i++) begin
        na[i] = a[i]; na[len+i] = b[i]; nb[i] = a[i]; nb[len+i] = -b[i];
      end
      for (int i = 0; i < 2 * len; i++) begin a[i] = na[i]; b[i] = nb[i]; end
      len *= 2;
    end
    in_valid = 0; in_phase = PH_IDLE; in_idx = 0; in_sym = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 512; i += 13)
      step(PH_PRE, i, 111, 222, a[511-i] * 6144, 0, a[511-i] * 6144, 0);
    step(PH_TR1, 3, 6144, 0, 6144, 0, 0, 0);
    step(PH_TR1, 4, -6144, 0, -6144, 0, 0, 0);
    step(PH_TR2, 3, 6144, 0, 0, 0, 6144, 0);
    step(PH_TR2, 9, -6144, 0, 0, 0, -6144, 0);
    step(PH_PIL, 1, 6144, -6144, 6144, -6144, 6144, -6144);
    step(PH_HDR, 0, 2048, 6144, 2048, 6144, 2048, 6144);
    step(PH_PAY, 5, -2048, 2048, -2048, 2048, -2048, 2048);
    step(PH_CRC, 7, 6144, 2048, 6144, 2048, 6144, 2048);
    step(PH_IDLE, 0, 6144, 2048, 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
