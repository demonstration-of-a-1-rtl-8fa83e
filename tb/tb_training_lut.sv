// tb_training_lut: reads all 64 entries through both ports and compares
// them with a Golay pair built here with +-1 integers; also checks the
// defining property of the pair (the aperiodic autocorrelations of a and b
// add up to zero at every non-zero lag).
module tb_training_lut;
  import mesh_pkg::*;
  localparam int N = TRAIN_LEN;
  logic [5:0] addr_a, addr_b;
  logic bit_a, bit_b;
  training_lut dut (.addr_a, .bit_a, .addr_b, .bit_b);
  int checks = 0, failures = 0;
  int a [N], b [N], na [N], nb [N];
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
    for (int k = 1; k < N; k++) begin
      s = 0;
      for (int i = 0; i + k < N; i++) s += a[i] * a[i+k] + b[i] * b[i+k];
      check(s == 0, $sformatf("Golay pair property at lag %0d", k));
    end
    for (int i = 0; i < N; i++) begin
      addr_a = 6'(i); addr_b = 6'(N - 1 - i);
      #1;
      check((bit_a ? 1 : -1) == b[i], $sformatf("entry %0d port a", i));
      check((bit_b ? 1 : -1) == b[N-1-i], $sformatf("entry %0d port b", N - 1 - i));
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
