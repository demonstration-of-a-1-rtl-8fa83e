// tb_qam_mapper: all 16 16-QAM nibbles, BPSK, QPSK and idle requests
// against a table written here; also checks that neighbouring 16-QAM
// points differ in exactly one bit (Gray property) and the one-clock
// latency.
module tb_qam_mapper;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  symreq_t in_req;
  cplx_t out_sym;
  qam_mapper dut (.clk, .rst, .in_valid, .in_req, .out_valid, .out_sym);
  int checks = 0, failures = 0;
  int lv [4] = '{-3, -1, 3, 1};   // index = 2-bit code 00,01,10,11
  int pt_re [16], pt_im [16];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic apply(input kind_e k, input logic [3:0] b, input int er, input int ei);
    @(negedge clk);
    in_valid = 1; in_req = '{k, b};
    @(negedge clk);
    in_valid = 0;
    check(out_valid, "out_valid one clock later");
    check(int'(out_sym.re) == er && int'(out_sym.im) == ei,
          $sformatf("kind %0d bits %b: (%0d,%0d) expected (%0d,%0d)", k, b, out_sym.re, out_sym.im, er, ei));
  endtask
  initial begin
    in_valid = 0; in_req = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int b = 0; b < 16; b++) begin
      pt_re[b] = lv[b >> 2] * 2048;
      pt_im[b] = lv[b & 3] * 2048;
      apply(K_QAM16, 4'(b), pt_re[b], pt_im[b]);
    end
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++)
        if ((pt_re[x] == pt_re[y] && (pt_im[x] - pt_im[y] == 4096 || pt_im[y] - pt_im[x] == 4096)) ||
            (pt_im[x] == pt_im[y] && (pt_re[x] - pt_re[y] == 4096 || pt_re[y] - pt_re[x] == 4096)))
          check($countones(4'(x) ^ 4'(y)) == 1, "Gray neighbours differ in one bit");
    apply(K_BPSK, 4'b0001, 6144, 0);
    apply(K_BPSK, 4'b0000, -6144, 0);
    apply(K_QPSK, 4'b0010, 6144, -6144);
    apply(K_QPSK, 4'b0001, -6144, 6144);
    apply(K_ZERO, 4'b1111, 0, 0);
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
