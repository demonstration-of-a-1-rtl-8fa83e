// tb_power_meter: random samples with a random gate; every reported power
// must equal the model's mean of re^2 + im^2 over the last 64 gated
// samples, and the number of reports must match. Also checks clear.
module tb_power_meter;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic clear, valid, gate, pv;
  cplx_t din;
  logic [31:0] power;
  power_meter dut (.clk, .rst, .clear, .valid, .gate, .din, .power, .power_valid(pv));
  int checks = 0, failures = 0, reports = 0, exp_reports = 0;
  longint acc = 0;
  int cnt = 0;
  longint expq [$];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  always_ff @(posedge clk) if (!rst && pv) begin
    reports++;
    check(expq.size() > 0 && longint'(power) == expq[0], $sformatf("power %0d", power));
    if (expq.size() > 0) void'(expq.pop_front());
  end
  initial begin
    clear = 0; valid = 0; gate = 0; din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      valid = $urandom_range(0, 3) != 0;
      gate  = $urandom_range(0, 4) != 0;
      din   = '{16'(int'($urandom_range(0, 60000)) - 30000), 16'(int'($urandom_range(0, 60000)) - 30000)};
      if (valid && gate) begin
        acc += longint'(din.re) * din.re + longint'(din.im) * din.im;
        cnt++;
        if (cnt == 64) begin
          expq.push_back(acc >> 6);
          exp_reports++;
          acc = 0; cnt = 0;
        end
      end
    end
    @(negedge clk); valid = 0; clear = 1;
    @(negedge clk); clear = 0;
    repeat (3) @(negedge clk);
    check(reports == exp_reports && reports > 10, $sformatf("%0d reports, expected %0d", reports, exp_reports));
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
