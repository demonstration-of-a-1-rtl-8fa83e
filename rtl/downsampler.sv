// downsampler: keeps one word in FACTOR.
//
// Counts enabled clocks and, on every FACTOR-th one, registers the input
// word and pulses out_valid. With FACTOR = 2 it takes the 8-samples-per-
// symbol matched-filter stream (and the energy level riding with it) down
// to 4 samples per symbol for the Golay correlator and timing search (at 2
// samples per symbol the fixed sampling phase left up to a quarter symbol
// of timing error). The factor is this design's; the paper's diagram only
// shows a down-arrow here.
module downsampler #(
  parameter int W      = 32,
  parameter int FACTOR = 2
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic [W-1:0] din,
  output logic         out_valid,
  output logic [W-1:0] dout
);
  logic [$clog2(FACTOR)-1:0] cnt;
  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0; out_valid <= 1'b0; dout <= '0;
    end else begin
      out_valid <= 1'b0;
      if (en) begin
        cnt <= (cnt == ($clog2(FACTOR))'(FACTOR - 1)) ? '0 : cnt + 1'b1;
        if (cnt == '0) begin
          dout      <= din;
          out_valid <= 1'b1;
        end
      end
    end
  end
endmodule
