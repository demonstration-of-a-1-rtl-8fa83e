// training_lut: read-only table of the known training sequence, with two
// combinational read ports.
//
// The same table serves the transmitter (training symbols of both antennas
// and the pilots) and the receiver (channel estimation and equalizer
// training). Each entry is one binary chip: 1 stands for +1, 0 for -1. The
// content is the length-TRAIN_LEN Golay "b" sequence of mesh_pkg::golay_b;
// the paper only says the training sequences are known and stored in a LUT.
module training_lut
  import mesh_pkg::*;
(
  input  logic [$clog2(TRAIN_LEN)-1:0] addr_a,
  output logic                         bit_a,
  input  logic [$clog2(TRAIN_LEN)-1:0] addr_b,
  output logic                         bit_b
);
  localparam logic [TRAIN_LEN-1:0] ROM = training_bits();
  assign bit_a = ROM[addr_a];
  assign bit_b = ROM[addr_b];
endmodule
