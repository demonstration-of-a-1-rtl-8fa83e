// tb_packetizer: checks that tick comes once every 8 clocks, and that the
// symbol pairs handed back (one per tick) leave one tick later, in order,
// with m_user on the first preamble symbol and m_last on the last symbol
// before idle.
module tb_packetizer;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic tick, in_valid, m_valid, m_user, m_last;
  phase_e in_phase;
  cplx_t in_ant [NANT], m_data [NANT];
  packetizer dut (.clk, .rst, .tick, .in_valid, .in_phase, .in_ant, .m_valid, .m_data, .m_user, .m_last);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // the upstream answers each tick 3 clocks later with a numbered symbol
  phase_e sched [40];
  int n_tick = 0, last_tick = -1, cyc = 0, n_out = 0, users = 0, lasts = 0;
  logic [2:0] pipe;
  initial begin
    for (int i = 0; i < 40; i++) sched[i] = (i < 5 || i >= 30) ? PH_IDLE : (i < 10 ? PH_PRE : PH_PAY);
  end
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst) pipe <= '0;
    else pipe <= {pipe[1:0], tick};
    if (!rst && tick) begin
      if (last_tick >= 0) check(cyc - last_tick == 8, "tick period 8");
      last_tick <= cyc;
    end
    if (!rst && m_valid) begin
      check(int'(m_data[0].re) == n_out && int'(m_data[1].im) == -n_out, $sformatf("symbol order %0d", n_out));
      check(m_user == (n_out == 5), $sformatf("m_user at %0d", n_out));
      check(m_last == (n_out == 29), $sformatf("m_last at %0d", n_out));
      if (m_user) users++;
      if (m_last) lasts++;
      n_out <= n_out + 1;
    end
  end
  always_comb begin
    in_valid = pipe[2];
    in_phase = sched[n_tick % 40];
    in_ant[0] = '{16'(n_tick), 16'd0};
    in_ant[1] = '{16'd0, 16'(-n_tick)};
  end
  always_ff @(posedge clk) if (pipe[2]) n_tick <= n_tick + 1;
  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    repeat (8 * 38) @(posedge clk);
    check(users == 1 && lasts == 1, "one frame start and end marked");
    check(n_out > 30, "symbols produced");
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
