// ber_counter: bit error counter against the PRBS-15 test pattern.
//
// In test mode the transmitter's payload is the PRBS-15 (x^15 + x^14 + 1)
// byte stream restarted from PRBS_SEED at every frame (the low byte of the
// state after each 8-step advance, high nibble sent first). On every payload
// nibble (gate) this block compares the received bits with the same pattern
// and adds the number of differing bits to errors and 4 to bits. restart
// (frame acquired) re-seeds the reference; clear zeroes the counters. BER =
// errors / bits. The paper reports BER; the test pattern is this design's.
module ber_counter
  import mesh_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  input  logic        restart,
  input  logic        valid,
  input  logic        gate,
  input  logic [3:0]  nib,
  output logic [31:0] errors,
  output logic [31:0] bits
);
  logic [14:0] st, nxt;
  logic        hi;          // next nibble is a byte's high nibble
  logic [3:0]  ref_nib;
  logic [3:0]  diff;

  assign nxt     = prbs15_step8(st);
  assign ref_nib = hi ? nxt[7:4] : st[3:0];
  assign diff    = nib ^ ref_nib;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= PRBS_SEED; hi <= 1'b1; errors <= '0; bits <= '0;
    end else begin
      if (restart) begin
        st <= PRBS_SEED;
        hi <= 1'b1;
      end else if (valid && gate) begin
        if (hi) st <= nxt;
        hi     <= ~hi;
        errors <= errors + 32'(diff[0]) + 32'(diff[1]) + 32'(diff[2]) + 32'(diff[3]);
        bits   <= bits + 32'd4;
      end
      if (clear) begin
        errors <= '0;
        bits   <= '0;
      end
    end
  end
endmodule
