// tb_sync_fifo: random push/pop traffic against a queue model. Checks data
// order, m_valid/s_ready against the model's fill level, the count output,
// and that the FIFO fills up (s_ready low) and drains (m_valid low).
module tb_sync_fifo;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  localparam int DEPTH = 4096;
  logic s_valid, s_ready, m_valid, m_ready;
  logic [7:0] s_data, m_data;
  logic [$clog2(DEPTH):0] count;
  sync_fifo dut (.clk, .rst, .s_valid, .s_ready, .s_data,
    .m_valid, .m_ready, .m_data, .count);
  int checks = 0, failures = 0, fulls = 0, empties = 0;
  logic [7:0] q [$];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    s_valid = 0; m_ready = 0; s_data = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 48000; cyc++) begin
      @(negedge clk);
      // bias: fill for a while, then drain
      s_valid = ($urandom_range(0, 99) < ((cyc / 12000) % 2 ? 30 : 80));
      m_ready = ($urandom_range(0, 99) < ((cyc / 12000) % 2 ? 80 : 30));
      s_data  = 8'($urandom);
      #1;
      check(s_ready == (q.size() < DEPTH), "s_ready");
      check(m_valid == (q.size() > 0), "m_valid");
      check(count == ($clog2(DEPTH)+1)'(q.size()), "count");
      if (m_valid) check(m_data == q[0], $sformatf("data %h vs %h", m_data, q[0]));
      if (!s_ready) fulls++;
      if (!m_valid) empties++;
      @(posedge clk);
      if (m_valid && m_ready) void'(q.pop_front());
      if (s_valid && s_ready) q.push_back(s_data);
    end
    check(fulls > 0, "FIFO reached full");
    check(empties > 0, "FIFO reached empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
