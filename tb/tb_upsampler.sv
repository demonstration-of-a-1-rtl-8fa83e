// tb_upsampler: feeds a symbol every 8 clocks and checks that each symbol
// appears for exactly one clock, one clock after it is given, with zeros in
// the 7 clocks between, on both antennas.
module tb_upsampler;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic in_valid;
  cplx_t in_sym [NANT], out_smp [NANT];
  upsampler dut (.clk, .rst, .in_valid, .in_sym, .out_smp);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    cplx_t s [NANT];
    in_valid = 0; in_sym = '{default: '0};
    repeat (2) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      s[0] = '{16'($urandom), 16'($urandom)};
      s[1] = '{16'($urandom), 16'($urandom)};
      in_valid = 1; in_sym = s;
      for (int j = 0; j < 8; j++) begin
        @(negedge clk);
        in_valid = 0; in_sym = '{default: '{16'sd77, 16'sd77}};
        if (j == 0) check(out_smp[0] == s[0] && out_smp[1] == s[1], "symbol passed once");
        else check(out_smp[0] == '0 && out_smp[1] == '0, "zero stuffed");
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
