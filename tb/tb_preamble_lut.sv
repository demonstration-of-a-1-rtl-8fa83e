// tb_preamble_lut: compares all 512 chips with a time-reversed length-512
// Golay sequence built here with +-1 integers, and checks that the table is
// one of a complementary pair: its aperiodic autocorrelation is 512 at lag 0
// and, added to that of its complement, zero at every other lag.
module tb_preamble_lut;
  import mesh_pkg::*;
  localparam int N = PRE_LEN;
  logic [8:0] addr;
  logic chip;
  preamble_lut dut (.addr, .chip);
  int checks = 0, failures = 0;
  int a [N], b [N], na [N], nb [N], p [N];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    int len, s;
    a[0] = 1; b[0] = 1; len = 1;
    while (len < N) begin
      for (int i = 0; i < len; i++) begin
        na[i] = a[i]; na[len+i] = b[i];
        nb[i] = a[i]; nb[len+i] = -b[i];
      end
      for (int i = 0; i < 2 * len; i++) begin a[i] = na[i]; b[i] = nb[i]; end
      len *= 2;
    end
    for (int i = 0; i < N; i++) begin
      addr = 9'(i);
      #1;
      p[i] = chip ? 1 : -1;
      check(p[i] == a[N-1-i], $sformatf("chip %0d", i));
    end
    for (int k = 0; k < N; k += 7) begin
      s = 0;
      for (int i = 0; i + k < N; i++) s += p[i] * p[i+k] + b[N-1-i] * b[N-1-i-k];
      check(s == ((k == 0) ? 2 * N : 0), $sformatf("complementary sum at lag %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
