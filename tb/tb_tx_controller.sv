// tb_tx_controller: steps the controller with a tick every 8 clocks and
// checks the sequence of frame sections and their lengths (512, 64, 64,
// 32, 8, 2 x pay_len, 8, then 16 idle gap symbols), that no frame starts
// while the FIFO holds fewer than pay_len bytes, the frame_start/frame_end
// pulses and the sequence number.
module tb_tx_controller;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic enable, tick, out_valid, frame_start, frame_end;
  logic [15:0] pay_len, idx, seq, frame_len;
  logic [12:0] fifo_count;
  phase_e phase;
  tx_controller dut (.clk, .rst, .enable, .tick, .pay_len, .fifo_count,
    .phase, .idx, .seq, .frame_len, .out_valid, .frame_start, .frame_end);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int div = 0;
  always_ff @(posedge clk) div <= (div + 1) % 8;
  assign tick = (div == 0) && !rst;

  phase_e ph_log [$];
  int     idx_log [$];
  int     starts = 0, ends = 0;
  always_ff @(posedge clk) if (!rst && out_valid) begin
    ph_log.push_back(phase);
    idx_log.push_back(int'(idx));
    if (frame_start) starts++;
    if (frame_end) ends++;
  end

  initial begin
    int exp_len [8];
    int p, n;
    enable = 1; pay_len = 16'd5; fifo_count = 13'd4;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (8 * 50) @(posedge clk);
    check(ph_log.size() > 40, "ticks produced symbols");
    foreach (ph_log[i]) check(ph_log[i] == PH_IDLE, "no frame before FIFO holds pay_len bytes");
    ph_log.delete(); idx_log.delete();
    fifo_count = 13'd5;
    repeat (8 * 900) @(posedge clk);
    exp_len = '{0, 512, 64, 64, 32, 8, 10, 8};
    // skip leading idle symbols
    p = 0;
    while (p < ph_log.size() && ph_log[p] == PH_IDLE) p++;
    for (int s = 1; s < 8; s++) begin
      n = 0;
      while (p < ph_log.size() && ph_log[p] == phase_e'(s)) begin
        check(idx_log[p] == n, $sformatf("index in section %0d", s));
        n++; p++;
      end
      check(n == exp_len[s], $sformatf("section %0d length %0d, expected %0d", s, n, exp_len[s]));
    end
    n = 0;
    while (p < ph_log.size() && ph_log[p] == PH_IDLE) begin n++; p++; end
    check(n == GAP_LEN + 1, $sformatf("gap %0d symbols", n));
    check(starts >= 1 && ends >= 1, "frame_start and frame_end pulsed");
    check(seq >= 16'd1, "sequence number advanced");
    check(frame_len == 16'd5, "frame length latched");
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
