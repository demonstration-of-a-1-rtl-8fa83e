// power_meter: gated mean power of a complex stream.
//
// Integrate-and-dump: while gate is high, every valid sample adds
// re^2 + im^2 to an accumulator; after 2^LOG_N such samples the mean
// (sum >> LOG_N) is presented on power with a one-clock power_valid pulse and
// the accumulator restarts. clear restarts the window. Used on each
// antenna's band signal before the matched filter and on the combined
// symbols after MRC. The paper computes its link metrics from gated power
// measurements; the window length is this design's choice.
module power_meter
  import mesh_pkg::*;
#(
  parameter int LOG_N = 6
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  input  logic        valid,
  input  logic        gate,
  input  cplx_t       din,
  output logic [31:0] power,
  output logic        power_valid
);
  logic [31+LOG_N:0] acc;
  logic [LOG_N-1:0]  cnt;
  logic [31:0]       p;

  assign p = 32'($signed(din.re) * $signed(din.re)) + 32'($signed(din.im) * $signed(din.im));

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      acc <= '0; cnt <= '0; power_valid <= 1'b0;
      if (rst) power <= '0;
    end else begin
      power_valid <= 1'b0;
      if (valid && gate) begin
        if (cnt == '1) begin
          power       <= 32'((acc + (32+LOG_N)'(p)) >> LOG_N);
          power_valid <= 1'b1;
          acc         <= '0;
        end else begin
          acc <= acc + (32+LOG_N)'(p);
        end
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
