// tb_ber_counter: builds the PRBS-15 byte stream here with a bit-serial
// x^15 + x^14 + 1 register (seed all ones, byte = low 8 bits of the state
// after 8 shifts, high nibble first), flips random bits of random nibbles
// and checks the error and bit counts, including ungated and invalid
// nibbles (not counted), restart (pattern re-seeded) and clear.
module tb_ber_counter;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic clear, restart, valid, gate;
  logic [3:0] nib;
  logic [31:0] errors, bits;
  ber_counter dut (.clk, .rst, .clear, .restart, .valid, .gate, .nib, .errors, .bits);
  int checks = 0, failures = 0;
  longint e_exp = 0, b_exp = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    logic [14:0] st;
    valid = 0; gate = 0; clear = 0; restart = 0; nib = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int f = 0; f < 8; f++) begin
      restart = 1;
      @(negedge clk);
      restart = 0;
      st = 15'h7FFF;
      for (int b = 0; b < 300; b++) begin
        for (int i = 0; i < 8; i++) st = {st[13:0], st[14] ^ st[13]};
        for (int h = 1; h >= 0; h--) begin
          logic [3:0] ref_n, flip;
          ref_n = h ? st[7:4] : st[3:0];
          flip = (f == 0) ? 4'h0 : (($urandom_range(0, 9) == 0) ? 4'($urandom_range(1, 15)) : 4'h0);
          // an ungated or invalid nibble in between must not count or advance
          if ($urandom_range(0, 7) == 0) begin
            nib = 4'($urandom); valid = $urandom_range(0, 1); gate = !valid;
            @(negedge clk);
          end
          nib = ref_n ^ flip;
          valid = 1; gate = 1;
          e_exp += $countones(flip);
          b_exp += 4;
          @(negedge clk);
          valid = 0; gate = 0;
        end
      end
      check(longint'(errors) == e_exp && longint'(bits) == b_exp,
            $sformatf("frame %0d: errors %0d/%0d bits %0d/%0d", f, errors, e_exp, bits, b_exp));
      if (f == 0) check(errors == 0, "error-free frame");
      if (f == 4) begin
        clear = 1;
        @(negedge clk);
        clear = 0;
        e_exp = 0; b_exp = 0;
        check(errors == 0 && bits == 0, "clear");
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
