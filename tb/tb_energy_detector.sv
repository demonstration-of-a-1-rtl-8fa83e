// tb_energy_detector: random two-antenna samples (bursts and silence) and a
// model of the 4096-sample moving sum of |re| + |im| over both antennas;
// the registered output must match the model every clock.
module tb_energy_detector;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  cplx_t din [NANT];
  logic [30:0] energy;
  energy_detector dut (.clk, .rst, .en(1'b1), .din, .energy);
  int checks = 0, failures = 0;
  int hist [$];
  longint sum = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int ab(input int v);
    return v < 0 ? -v : v;
  endfunction
  initial begin
    int t;
    din = '{default: '0};
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int k = 0; k < 12000; k++) begin
      bit loud;
      loud = ((k / 3000) % 2) == 0;
      for (int a = 0; a < NANT; a++)
        din[a] = loud ? '{16'(int'($urandom_range(0, 65535)) - 32768), 16'(int'($urandom_range(0, 65535)) - 32768)}
                      : '{16'(int'($urandom_range(0, 20)) - 10), 16'(int'($urandom_range(0, 20)) - 10)};
      t = 0;
      for (int a = 0; a < NANT; a++) t += ab(int'(din[a].re)) + ab(int'(din[a].im));
      hist.push_back(t);
      sum += t;
      if (hist.size() > 4096) sum -= hist.pop_front();
      @(negedge clk);
      if (k % 7 == 0 || k > 11990) check(longint'(energy) == sum, $sformatf("k=%0d energy %0d expected %0d", k, energy, sum));
    end
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
