// preamble_lut: read-only table of the 512-chip (64-byte) Golay preamble,
// one combinational read port.
//
// The chips are the Golay sequence a_9 of mesh_pkg::golay_a, stored in time
// reversed order so that the receiver's efficient Golay correlator, which
// convolves with a_9, is exactly the matched filter of what is sent. 1 means
// +1 and 0 means -1. The paper gives the preamble length (64 bytes) and that
// it is Golay based; the recursion and the reversal are this design's.
module preamble_lut
  import mesh_pkg::*;
(
  input  logic [PRE_LOG-1:0]         addr,
  output logic                       chip
);
  localparam logic [PRE_LEN-1:0] ROM = preamble_bits();
  assign chip = ROM[addr];
endmodule
