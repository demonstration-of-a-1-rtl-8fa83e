// tb_rx_deframer: builds frames here (header {len, seq}, payload, CRC-32
// computed bit by bit, reflected 0xEDB88320, least significant byte first,
// high nibble of each byte first), feeds them as data-symbol nibbles and
// checks the payload bytes and m_last, frame_done, crc_ok, the header
// fields and the good/bad frame counters. Some frames get a flipped bit
// (CRC must fail), one has length 0 (ended at once as bad), and pilot-phase
// nibbles in front must be ignored.
module tb_rx_deframer;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic sync, in_valid, pay_gate, m_valid, m_last, frame_done, crc_ok;
  logic [3:0] nib;
  phase_e in_phase;
  logic [7:0] m_data;
  logic [15:0] hdr_len, hdr_seq;
  logic [31:0] frames_ok, frames_bad;
  rx_deframer dut (.clk, .rst, .sync, .in_valid, .nib, .in_phase, .pay_gate,
    .m_valid, .m_data, .m_last, .frame_done, .crc_ok, .hdr_len, .hdr_seq, .frames_ok, .frames_bad);
  int checks = 0, failures = 0;
  byte unsigned got [$];
  int lasts = 0, dones = 0, gates = 0;
  logic done_ok;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [31:0] crc_upd(input logic [31:0] c, input byte unsigned b);
    c ^= 32'(b);
    for (int i = 0; i < 8; i++) c = c[0] ? (c >> 1) ^ 32'hEDB88320 : c >> 1;
    return c;
  endfunction
  always @(posedge clk) if (!rst) begin
    if (m_valid) begin got.push_back(m_data); if (m_last) lasts++; end
    if (frame_done) begin dones++; done_ok = crc_ok; end
    if (pay_gate && in_valid) gates++;
  end
  task automatic put(input logic [3:0] n, input phase_e ph);
    nib = n; in_phase = ph; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask
  task automatic put_byte(input byte unsigned b, input bit flip_lo);
    put(b[7:4], PH_PAY);
    put(b[3:0] ^ {3'b000, flip_lo}, PH_PAY);
  endtask
  initial begin
    int ok_exp = 0, bad_exp = 0;
    sync = 0; in_valid = 0; nib = '0; in_phase = PH_IDLE;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int f = 0; f < 14; f++) begin
      int len, seq, flip_at;
      byte unsigned pay [$], hdr [4];
      logic [31:0] c;
      len = (f == 5) ? 0 : int'($urandom_range(1, 300));
      seq = int'($urandom_range(0, 65535));
      flip_at = (f % 4 == 3) ? int'($urandom_range(4, len + 3)) : -1;
      hdr = '{8'(len), 8'(len >> 8), 8'(seq), 8'(seq >> 8)};
      c = 32'hFFFFFFFF;
      foreach (hdr[i]) c = crc_upd(c, hdr[i]);
      for (int i = 0; i < len; i++) begin
        pay.push_back(8'($urandom));
        c = crc_upd(c, pay[i]);
      end
      c = ~c;
      got.delete(); lasts = 0; dones = 0; gates = 0;
      sync = 1;
      @(negedge clk);
      sync = 0;
      for (int i = 0; i < 6; i++) put(4'($urandom), PH_PIL);
      foreach (hdr[i]) put_byte(hdr[i], 0);
      if (len == 0) begin
        repeat (3) @(negedge clk);
        check(dones == 1 && !done_ok, "zero length ends the frame as bad");
        bad_exp++;
      end else begin
        for (int i = 0; i < len; i++) put_byte(pay[i], i + 4 == flip_at);
        for (int i = 0; i < 4; i++) put_byte(8'(c >> (8 * i)), 0);
        repeat (3) @(negedge clk);
        check(dones == 1, $sformatf("frame %0d: %0d frame_done pulses", f, dones));
        check(got.size() == len && lasts == 1, $sformatf("frame %0d: %0d bytes, %0d last", f, got.size(), lasts));
        for (int i = 0; i < len && i < got.size(); i++)
          if (flip_at != i + 4) check(got[i] == pay[i], $sformatf("frame %0d byte %0d", f, i));
        check(gates == 2 * len, $sformatf("frame %0d pay_gate count %0d", f, gates));
        check(hdr_seq == 16'(seq), "header seq");
        check(done_ok == (flip_at < 0), $sformatf("frame %0d crc_ok %0d", f, done_ok));
        if (flip_at < 0) ok_exp++; else bad_exp++;
        check(hdr_len == 16'(len), "header len");
      end
      check(int'(frames_ok) == ok_exp && int'(frames_bad) == bad_exp, "frame counters");
    end
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
