// tb_frame_gen: walks the frame generator through one frame (training,
// pilots, header, payload of 6 bytes from a FIFO model, CRC) and checks
// every symbol request: BPSK training chips and QPSK pilot pairs against
// the training table, header and payload nibbles (high first), and the
// CRC-32, recomputed here bit by bit, least significant byte first. Also
// checks FIFO pops and the underrun flag when the FIFO runs dry.
module tb_frame_gen;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic in_valid, fifo_valid, fifo_pop, tr_bit_a, tr_bit_b, out_valid, underrun;
  phase_e in_phase, out_phase;
  logic [15:0] in_idx, len, seq, out_idx;
  logic [7:0] fifo_data;
  logic [5:0] tr_addr_a, tr_addr_b;
  symreq_t out_req;
  frame_gen dut (.clk, .rst, .in_valid, .in_phase, .in_idx, .len, .seq, .fifo_valid, .fifo_data,
    .fifo_pop, .tr_addr_a, .tr_addr_b, .tr_bit_a, .tr_bit_b, .out_valid, .out_phase, .out_idx,
    .out_req, .underrun);
  training_lut u_lut (.addr_a(tr_addr_a), .bit_a(tr_bit_a), .addr_b(tr_addr_b), .bit_b(tr_bit_b));
  localparam logic [TRAIN_LEN-1:0] TB = training_bits();
  int checks = 0, failures = 0, pops = 0;
  logic [7:0] pay [6] = '{8'h12, 8'hA5, 8'h00, 8'hFF, 8'h3C, 8'h81};
  logic [7:0] fifo_q [$];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [31:0] crc_bitwise(input logic [7:0] bytes [$]);
    logic [31:0] c;
    c = 32'hFFFFFFFF;
    foreach (bytes[i])
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = c[0] ^ bytes[i][k];
        c = c >> 1;
        if (fb) c = c ^ 32'hEDB88320;
      end
    return ~c;
  endfunction
  assign fifo_valid = fifo_q.size() > 0;
  assign fifo_data  = fifo_valid ? fifo_q[0] : 8'h00;
  always_ff @(posedge clk) if (fifo_pop) begin void'(fifo_q.pop_front()); pops++; end
  task automatic sym(input phase_e p, input int i, input kind_e k, input logic [3:0] b);
    @(negedge clk);
    in_valid = 1; in_phase = p; in_idx = 16'(i);
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_phase == p && out_idx == 16'(i), "tag follows");
    check(out_req.kind == k && out_req.bits == b,
          $sformatf("phase %0d idx %0d: kind %0d bits %h, expected %0d %h", p, i, out_req.kind, out_req.bits, k, b));
  endtask
  initial begin
    logic [7:0] all [$];
    logic [31:0] crc;
    in_valid = 0; in_phase = PH_IDLE; in_idx = 0; len = 16'd6; seq = 16'hBEEF;
    foreach (pay[i]) fifo_q.push_back(pay[i]);
    repeat (2) @(posedge clk);
    rst = 0;
    sym(PH_PRE, 0, K_ZERO, 4'h0);
    for (int i = 0; i < TRAIN_LEN; i += 5) sym(PH_TR1, i, K_BPSK, {3'b0, TB[i]});
    for (int i = 0; i < TRAIN_LEN; i += 7) sym(PH_TR2, i, K_BPSK, {3'b0, TB[i]});
    for (int i = 0; i < PILOT_LEN; i++) sym(PH_PIL, i, K_QPSK, {2'b0, TB[2*i], TB[2*i+1]});
    all = '{8'h06, 8'h00, 8'hEF, 8'hBE};
    for (int i = 0; i < 8; i++) sym(PH_HDR, i, K_QAM16, i % 2 ? all[i/2][3:0] : all[i/2][7:4]);
    for (int i = 0; i < 12; i++) sym(PH_PAY, i, K_QAM16, i % 2 ? pay[i/2][3:0] : pay[i/2][7:4]);
    foreach (pay[i]) all.push_back(pay[i]);
    crc = crc_bitwise(all);
    for (int i = 0; i < 8; i++) sym(PH_CRC, i, K_QAM16, 4'(crc >> (8 * (i / 2) + (i % 2 ? 0 : 4))));
    check(pops == 6, "six payload bytes popped");
    // a second frame with an empty FIFO must flag underrun
    sym(PH_PRE, 0, K_ZERO, 4'h0);
    @(negedge clk); in_valid = 1; in_phase = PH_PAY; in_idx = 0;
    @(negedge clk); in_valid = 0;
    check(underrun, "underrun on empty FIFO");
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
