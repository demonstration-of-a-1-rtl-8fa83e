// tb_qam_demapper: random soft symbols over the whole 16-bit range; the
// demapper must return the Gray bits and the level of the nearest 16-QAM
// point per axis (decision boundaries at 0 and +-2 QS), with the soft value
// and labels passed through, one clock later.
module tb_qam_demapper;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  cplx_t y, dec, y_out;
  phase_e in_phase, out_phase;
  logic [15:0] in_idx, out_idx;
  logic [3:0] bits;
  qam_demapper dut (.clk, .rst, .in_valid, .y, .in_phase, .in_idx, .out_valid, .bits, .dec, .y_out, .out_phase, .out_idx);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic void ref_axis(input int v, output logic [1:0] b, output int l);
    if (v < -2 * QS) begin b = 2'b00; l = -3 * QS; end
    else if (v < 0) begin b = 2'b01; l = -QS; end
    else if (v < 2 * QS) begin b = 2'b11; l = QS; end
    else begin b = 2'b10; l = 3 * QS; end
  endfunction
  initial begin
    logic [1:0] bi, bq;
    int li, lq;
    in_valid = 0; y = '0; in_phase = PH_IDLE; in_idx = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int n = 0; n < 3000; n++) begin
      int vr, vi;
      vr = int'($urandom_range(0, 65535)) - 32768;
      vi = (n % 3 == 0) ? (int'($urandom_range(0, 3)) * 2 - 3) * QS + int'($urandom_range(0, 400)) - 200
                        : int'($urandom_range(0, 65535)) - 32768;
      if (vr == 0 || vr == 2 * QS || vr == -2 * QS) vr++;
      if (vi == 0 || vi == 2 * QS || vi == -2 * QS) vi++;
      y = '{16'(vr), 16'(vi)};
      in_phase = (n % 2) ? PH_PAY : PH_PIL;
      in_idx = 16'(n);
      in_valid = 1;
      ref_axis(vr, bi, li);
      ref_axis(vi, bq, lq);
      @(negedge clk);
      in_valid = 0;
      check(out_valid && bits == {bi, bq}, $sformatf("y=%0d,%0d bits %b expected %b", vr, vi, bits, {bi, bq}));
      check(int'(dec.re) == li && int'(dec.im) == lq, "decided point");
      check(y_out == y && out_phase == in_phase && out_idx == in_idx, "pass-through");
      if (n % 5 == 0) begin
        @(negedge clk);
        check(!out_valid, "valid follows in_valid");
      end
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
