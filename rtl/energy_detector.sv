// energy_detector: moving-window signal level of the matched-filter output.
//
// Every enabled clock it adds |re| + |im| of both antennas' samples to a
// running sum over the last 2^LOG_W samples (4096, the
// span of the preamble at 8 samples per chip) (a circular buffer holds the
// terms that leave the window). The sum is the reference level of the
// correlator's adaptive threshold, so detection scales with the received
// signal rather than with a fixed level. The paper only names the block and
// says the threshold is adaptive; the L1 magnitude and window are this
// design's. energy is registered, one clock after the sample. The buffer
// has no reset (so it can be a RAM); until it has been filled once after
// reset the leaving terms are taken as zero.
module energy_detector
  import mesh_pkg::*;
#(
  parameter int LOG_W = 12
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              en,
  input  cplx_t             din [NANT],
  output logic [LOG_W+18:0] energy
);
  localparam int TW = 18;
  logic [TW-1:0]       term;
  logic [TW-1:0]       buf_q [1 << LOG_W];
  logic [LOG_W-1:0]    ptr;
  logic [LOG_W+18:0]   sum;
  logic                full;     // window filled since reset
  logic [TW-1:0]       old;

  function automatic logic [15:0] absv(input logic signed [15:0] v);
    return v[15] ? 16'(-v) : 16'(v);
  endfunction

  always_comb begin
    term = '0;
    for (int a = 0; a < NANT; a++)
      term += TW'(absv(din[a].re)) + TW'(absv(din[a].im));
  end

  assign old = full ? buf_q[ptr] : '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr <= '0; sum <= '0; energy <= '0; full <= 1'b0;
    end else if (en) begin
      ptr    <= ptr + 1'b1;
      if (&ptr) full <= 1'b1;
      sum    <= sum + (LOG_W+19)'(term) - (LOG_W+19)'(old);
      energy <= sum + (LOG_W+19)'(term) - (LOG_W+19)'(old);
    end
  end

  // window storage: no reset, so it can be a RAM
  always_ff @(posedge clk) begin
    if (en) buf_q[ptr] <= term;
  end
endmodule
