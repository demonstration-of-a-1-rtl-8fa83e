// tb_downsampler: counts words through a factor-2 and a factor-4
// downsampler and checks that exactly every FACTOR-th word (the first of
// each group) comes out, registered, with out_valid.
module tb_downsampler;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [15:0] din, d2, d4;
  logic v2, v4;
  downsampler #(.W(16), .FACTOR(2)) dut2 (.clk, .rst, .en(1'b1), .din, .out_valid(v2), .dout(d2));
  downsampler #(.W(16), .FACTOR(4)) dut4 (.clk, .rst, .en(1'b1), .din, .out_valid(v4), .dout(d4));
  int checks = 0, failures = 0, n2 = 0, n4 = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    din = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int k = 0; k < 400; k++) begin
      din = 16'(k);
      @(negedge clk);
      check(v2 == (k % 2 == 0), "factor 2 valid pattern");
      check(v4 == (k % 4 == 0), "factor 4 valid pattern");
      if (v2) begin check(d2 == 16'(k), "factor 2 word"); n2++; end
      if (v4) begin check(d4 == 16'(k), "factor 4 word"); n4++; end
    end
    check(n2 == 200 && n4 == 100, "output counts");
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
