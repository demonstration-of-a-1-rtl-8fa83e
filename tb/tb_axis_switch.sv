// tb_axis_switch: three packet sources with random valid gaps and random
// packet lengths, and a sink with random back-pressure. Every packet must
// arrive whole and in order per source, never interleaved with another
// (tid constant from first to last beat), with the right tid; sources obey
// the AXI-Stream rule of holding data while valid and not ready.
module tb_axis_switch;
  localparam int N = 3;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [N-1:0] s_tvalid, s_tready, s_tlast;
  logic [7:0] s_tdata [N];
  logic m_tvalid, m_tready, m_tlast;
  logic [7:0] m_tdata;
  logic [1:0] m_tid;
  axis_switch dut (.clk, .rst, .s_tvalid, .s_tready, .s_tdata, .s_tlast,
    .m_tvalid, .m_tready, .m_tdata, .m_tlast, .m_tid);
  int checks = 0, failures = 0;
  // per source: queue of packet lengths still to send; data = running count
  int plen [N][$], sent [N], pos [N], rcv [N], pkts [N], cur_tid = -1, beats = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // sources: change data only when idle or after a handshake
  always @(posedge clk) begin
    if (rst) begin
      s_tvalid <= '0; s_tlast <= '0;
      for (int i = 0; i < N; i++) begin sent[i] = 0; pos[i] = 0; s_tdata[i] <= '0; end
    end else begin
      for (int i = 0; i < N; i++) begin
        if (s_tvalid[i] && s_tready[i]) begin
          sent[i]++;
          pos[i]++;
          if (s_tlast[i]) begin pos[i] = 0; void'(plen[i].pop_front()); end
        end
        if (!(s_tvalid[i] && !s_tready[i])) begin
          if (plen[i].size() > 0 && $urandom_range(0, 3) != 0) begin
            s_tvalid[i] <= 1'b1;
            s_tdata[i]  <= 8'(sent[i]);
            s_tlast[i]  <= (pos[i] == plen[i][0] - 1);
          end else begin
            s_tvalid[i] <= 1'b0;
          end
        end
      end
    end
  end
  // sink
  always @(posedge clk) if (!rst) begin
    if (m_tvalid && m_tready) begin
      int id;
      id = int'(m_tid);
      beats++;
      check(id < N, "tid in range");
      if (cur_tid >= 0) check(id == cur_tid, "packets not interleaved");
      check(m_tdata == 8'(rcv[id]), $sformatf("source %0d byte %0d got %0d", id, rcv[id], m_tdata));
      rcv[id]++;
      cur_tid = m_tlast ? -1 : id;
      if (m_tlast) pkts[id]++;
    end
    m_tready <= ($urandom_range(0, 4) != 0);
  end
  initial begin
    int total;
    total = 0;
    m_tready = 0;
    for (int i = 0; i < N; i++) begin
      rcv[i] = 0; pkts[i] = 0;
      for (int p = 0; p < 40; p++) begin
        plen[i].push_back(int'($urandom_range(1, 30)));
        total += plen[i][p];
      end
    end
    repeat (3) @(posedge clk);
    rst = 0;
    wait (beats == total);
    repeat (20) @(posedge clk);
    for (int i = 0; i < N; i++) check(pkts[i] == 40 && plen[i].size() == 0, $sformatf("source %0d: %0d packets", i, pkts[i]));
    check(beats == total, "all beats delivered");
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
