// tb_chan_est: builds the two training intervals for a random 2x2 complex
// channel (antenna t alone during interval t, chips +-1 from the training
// table), with small noise, and checks the estimated h(r,t) and the
// effective gains g_r = h(r,1) + h(r,2) against the true channel; several
// frames in a row check that the accumulators restart per frame.
module tb_chan_est;
  import mesh_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic sym_valid, tr_bit, gains_valid;
  cplx_t sym [NANT], g [NANT], h [NANT][NANT];
  phase_e sym_phase;
  logic [15:0] sym_idx;
  logic [$clog2(TRAIN_LEN)-1:0] tr_addr;
  logic unused_b;
  chan_est dut (.clk, .rst, .sym_valid, .sym, .sym_phase, .sym_idx, .tr_addr, .tr_bit, .gains_valid, .g, .h);
  training_lut u_lut (.addr_a(tr_addr), .bit_a(tr_bit), .addr_b('0), .bit_b(unused_b));
  localparam logic [TRAIN_LEN-1:0] TB = training_bits();
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int ab(input int v);
    return v < 0 ? -v : v;
  endfunction
  initial begin
    int hr [NANT][NANT], hi [NANT][NANT];
    sym_valid = 0; sym = '{default: '0}; sym_phase = PH_IDLE; sym_idx = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int f = 0; f < 20; f++) begin
      for (int r = 0; r < NANT; r++)
        for (int t = 0; t < NANT; t++) begin
          hr[r][t] = int'($urandom_range(0, 12000)) - 6000;
          hi[r][t] = int'($urandom_range(0, 12000)) - 6000;
        end
      for (int t = 0; t < NANT; t++)
        for (int i = 0; i < TRAIN_LEN; i++) begin
          int c;
          c = TB[i] ? 1 : -1;
          for (int r = 0; r < NANT; r++)
            sym[r] = '{16'(c * hr[r][t] + int'($urandom_range(0, 8)) - 4), 16'(c * hi[r][t] + int'($urandom_range(0, 8)) - 4)};
          sym_phase = t == 0 ? PH_TR1 : PH_TR2;
          sym_idx = 16'(i);
          sym_valid = 1;
          @(negedge clk);
          sym_valid = 0;
          if (!(t == 1 && i == TRAIN_LEN - 1)) check(!gains_valid, "no early gains_valid");
          repeat (3) @(negedge clk);
        end
      // gains_valid pulsed one clock after the last training symbol
      @(negedge clk);
      for (int r = 0; r < NANT; r++) begin
        for (int t = 0; t < NANT; t++)
          check(ab(int'(h[r][t].re) - hr[r][t]) <= 4 && ab(int'(h[r][t].im) - hi[r][t]) <= 4,
                $sformatf("frame %0d h[%0d][%0d] = %0d,%0d, true %0d,%0d", f, r, t, h[r][t].re, h[r][t].im, hr[r][t], hi[r][t]));
        check(ab(int'(g[r].re) - hr[r][0] - hr[r][1]) <= 6 && ab(int'(g[r].im) - hi[r][0] - hi[r][1]) <= 6,
              $sformatf("frame %0d g[%0d]", f, r));
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
