// tb_evm_meter: frames of gated symbols with a different noise level each;
// after frame_end, evm2 must equal floor(2^16 sum|y-d|^2 / sum|d|^2) of
// that frame's gated symbols, with one evm_valid pulse per frame.
module tb_evm_meter;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic valid, gate, frame_end, evm_valid, busy;
  cplx_t y, d;
  logic [31:0] evm2;
  evm_meter dut (.clk, .rst, .valid, .gate, .frame_end, .y, .d, .evm2, .evm_valid, .busy);
  int checks = 0, failures = 0, pulses = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  always @(posedge clk) if (!rst && evm_valid) pulses++;
  initial begin
    longint se, sd, expv;
    valid = 0; gate = 0; frame_end = 0; y = '0; d = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int f = 0; f < 10; f++) begin
      int sc;
      sc = 50 + 400 * f;
      se = 0; sd = 0;
      for (int n = 0; n < 500 + 37 * f; n++) begin
        int dr, di, nr, ni;
        dr = (2 * int'($urandom_range(0, 3)) - 3) * QS;
        di = (2 * int'($urandom_range(0, 3)) - 3) * QS;
        nr = int'($urandom_range(0, 2 * sc)) - sc;
        ni = int'($urandom_range(0, 2 * sc)) - sc;
        d = '{16'(dr), 16'(di)};
        y = '{16'(dr + nr), 16'(di + ni)};
        valid = ($urandom_range(0, 4) != 0);
        gate = ($urandom_range(0, 6) != 0);
        if (valid && gate) begin
          se += nr * nr + ni * ni;
          sd += dr * dr + di * di;
        end
        @(negedge clk);
      end
      valid = 0; gate = 0;
      frame_end = 1;
      @(negedge clk);
      frame_end = 0;
      expv = (se <<< 16) / sd;
      pulses = 0;
      repeat (80) @(negedge clk);
      check(pulses == 1, $sformatf("frame %0d: %0d evm_valid pulses", f, pulses));
      check(longint'(evm2) == expv, $sformatf("frame %0d evm2 %0d expected %0d", f, evm2, expv));
      check(!busy, "divider finished");
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
