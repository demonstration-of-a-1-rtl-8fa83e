// tb_gain_stage: random samples and gains against a rounding, saturating
// model written here; includes unity gain, zero gain and saturation cases.
module tb_gain_stage;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [15:0] gain;
  cplx_t din, dout;
  gain_stage dut (.clk, .rst, .en(1'b1), .gain, .din, .dout);
  int checks = 0, failures = 0, sats = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int model(input int x, input int g);
    longint p;
    p = longint'(x) * g;
    p = (p + 2048) >>> 12;
    if (p > 32767) return 32767;
    if (p < -32768) return -32768;
    return int'(p);
  endfunction
  initial begin
    int xr, xi, g;
    din = '0; gain = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      xr = int'($signed(16'($urandom))); xi = int'($signed(16'($urandom)));
      case (k % 4)
        0: g = 4096;
        1: g = 0;
        default: g = int'($urandom_range(0, 65535));
      endcase
      din = '{16'(xr), 16'(xi)}; gain = 16'(g);
      @(negedge clk);
      check(int'(dout.re) == model(xr, g) && int'(dout.im) == model(xi, g),
            $sformatf("x=(%0d,%0d) g=%0d -> (%0d,%0d)", xr, xi, g, dout.re, dout.im));
      if (model(xr, g) == 32767 || model(xr, g) == -32768) sats++;
    end
    check(sats > 0, "saturation exercised");
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
