// tb_nco_mixer: mixes a constant and a random complex input with tones of
// several frequencies (positive and negative) and compares every output
// with x exp(j 2 pi f n) computed here in floating point (tolerance covers
// the 10-bit phase quantisation); checks the two-clock latency.
module tb_nco_mixer;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [31:0] freq;
  cplx_t din, dout;
  nco_mixer dut (.clk, .rst, .en(1'b1), .freq, .din, .dout);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic real rabs(input real x);
    return x < 0.0 ? -x : x;
  endfunction
  initial begin
    logic [31:0] fw [4] = '{32'h2000_0000, 32'hE000_0000, 32'h0123_4567, 32'hA000_0000};
    real pi, ph, er, ei, xr, xi, tol;
    real hx_r [201], hx_i [201];
    pi = 3.141592653589793;
    din = '0; freq = 0;
    for (int t = 0; t < 4; t++) begin
      rst = 1; freq = fw[t];
      repeat (2) @(posedge clk);
      @(negedge clk);
      rst = 0;
      din = '0;
      // sample n is mixed with phase n * freq and appears two clocks later
      for (int n = 0; n <= 200; n++) begin
        if (n >= 2) begin
          logic [31:0] pa;
          pa = 32'(n - 2) * fw[t];
          ph = 2.0 * pi * real'(pa[31:22]) / 1024.0;
          er = hx_r[n-2] * $cos(ph) - hx_i[n-2] * $sin(ph);
          ei = hx_r[n-2] * $sin(ph) + hx_i[n-2] * $cos(ph);
          tol = 4.0;
          check(rabs(real'(dout.re) - er) <= tol && rabs(real'(dout.im) - ei) <= tol,
                $sformatf("f=%h n=%0d: (%0d,%0d) expected (%f,%f)", fw[t], n - 2, dout.re, dout.im, er, ei));
        end
        xr = (t == 2) ? real'(int'($urandom_range(0, 40000)) - 20000) : 20000.0;
        xi = (t == 2) ? real'(int'($urandom_range(0, 40000)) - 20000) : -5000.0;
        hx_r[n] = xr; hx_i[n] = xi;
        din = '{16'(int'(xr)), 16'(int'(xi))};
        @(negedge clk);
      end
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
