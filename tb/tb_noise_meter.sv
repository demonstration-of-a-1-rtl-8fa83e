// tb_noise_meter: random equalized symbols y and decisions d with gating;
// each noise_valid must report the mean of |y - d|^2 over the last 64
// gated samples (floor), and clear must restart the window.
module tb_noise_meter;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic clear, valid, gate, noise_valid;
  cplx_t y, d;
  logic [31:0] noise;
  noise_meter dut (.clk, .rst, .clear, .valid, .gate, .y, .d, .noise, .noise_valid);
  int checks = 0, failures = 0, reports = 0;
  longint acc = 0, cnt = 0, expect_q [$];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  always @(posedge clk) if (!rst && noise_valid) begin
    reports++;
    check(expect_q.size() > 0 && longint'(noise) == expect_q[0], $sformatf("noise %0d expected %0d", noise, expect_q.size() ? expect_q[0] : -1));
    if (expect_q.size()) void'(expect_q.pop_front());
  end
  initial begin
    clear = 0; valid = 0; gate = 0; y = '0; d = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int n = 0; n < 4000; n++) begin
      int dr, di, nr, ni, sc;
      sc = (n < 2000) ? 300 : 3000;
      dr = (2 * int'($urandom_range(0, 3)) - 3) * QS;
      di = (2 * int'($urandom_range(0, 3)) - 3) * QS;
      nr = int'($urandom_range(0, 2 * sc)) - sc;
      ni = int'($urandom_range(0, 2 * sc)) - sc;
      d = '{16'(dr), 16'(di)};
      y = '{16'(dr + nr), 16'(di + ni)};
      valid = ($urandom_range(0, 3) != 0);
      gate = ($urandom_range(0, 5) != 0);
      clear = (n == 1234);
      if (clear) begin acc = 0; cnt = 0; end
      else if (valid && gate) begin
        acc += nr * nr + ni * ni;
        cnt++;
        if (cnt == 64) begin expect_q.push_back(acc >> 6); acc = 0; cnt = 0; end
      end
      @(negedge clk);
    end
    valid = 0; gate = 0; clear = 0;
    repeat (5) @(negedge clk);
    check(reports > 30, $sformatf("%0d reports", reports));
    check(expect_q.size() == 0, "every window reported");
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
