// tb_srrc_filter: impulse response of the filter against a square-root
// raised cosine (roll-off 0.5, 8 samples per symbol) computed here in
// floating point, at both output scalings (15: transmit, 18: matched
// filter), and the two-clock latency.
module tb_srrc_filter;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  cplx_t din, d15, d18;
  srrc_filter dut (.clk, .rst, .en(1'b1), .din, .dout(d15));
  srrc_filter #(.SHIFT(18)) dut_mf (.clk, .rst, .en(1'b1), .din, .dout(d18));
  int checks = 0, failures = 0;
  real h [65];
  int  hi [65];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic real rabs(input real x);
    return x < 0.0 ? -x : x;
  endfunction
  function automatic real srrc(input real t);
    real a, pi;
    a = 0.5; pi = 3.141592653589793;
    if (t == 0.0) return 1.0 - a + 4.0 * a / pi;
    if ((4.0 * a * t) ** 2 == 1.0)
      return a / $sqrt(2.0) * ((1 + 2 / pi) * $sin(pi / (4 * a)) + (1 - 2 / pi) * $cos(pi / (4 * a)));
    return ($sin(pi * t * (1 - a)) + 4 * a * t * $cos(pi * t * (1 + a))) / (pi * t * (1 - (4 * a * t) ** 2));
  endfunction
  initial begin
    real peak;
    peak = srrc(0.0);
    for (int n = 0; n < 65; n++) h[n] = srrc((n - 32) / 8.0) / peak * 32767.0;
    din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); din = '{16'sd16384, -16'sd16384};
    @(negedge clk); din = '0;
    // output appears 2 clocks after the input
    for (int n = 0; n < 65; n++) begin
      real e;
      if (n > 0) @(negedge clk);
      if (n == 0) @(negedge clk);
      e = h[n] / 2.0;
      hi[n] = int'(d15.re) * 2;
      check(rabs(real'(d15.re) - e) <= 1.5 && rabs(real'(d15.im) + e) <= 1.5,
            $sformatf("tap %0d: %0d expected %f", n, d15.re, e));
      check(rabs(real'(d18.re) - e / 8.0) <= 1.5, $sformatf("matched-filter scaling tap %0d", n));
    end
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
