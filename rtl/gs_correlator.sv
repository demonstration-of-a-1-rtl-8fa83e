// gs_correlator: Golay-sequence preamble detector with adaptive threshold.
//
// One efficient Golay correlator (golay_egc) per receive antenna runs on the
// 4-samples-per-symbol stream. The detection metric is the sum over the
// antennas of |Re c| + |Im c| (non-coherent combining, no multiplier).
// flag is raised when 128 * metric >= thr * energy and energy >= emin,
// where energy is the energy detector's sum of |re| + |im| over the last
// 4096 samples, the span of the 512-chip preamble at 8 samples per chip.
// Since a clean preamble gives metric = 512 x (mean |re| + |im| per sample),
// this is metric / (512 x mean level) >= thr / 16: thr = 8 detects at half
// the ideal peak. thr = 16 is recommended: with 8, partial overlaps early in
// a preamble (while the energy window still holds mostly noise) can cross
// the threshold and start the timing search too soon. Because both sides look at the same span, the ratio stays
// bounded when a frame ends and the signal disappears. emin keeps silence
// from triggering. Correlation against the Golay preamble with an
// adaptive threshold is the paper's; the combining, the metric and the
// threshold rule are this design's.
//
// Timing: all outputs registered together on valid: metric/flag refer to
// the window that ends with the sample on x_out.
module gs_correlator
  import mesh_pkg::*;
#(
  parameter int OSR = 4,
  parameter int EW  = 31,
  parameter int MW  = 30
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          valid,
  input  cplx_t         din [NANT],
  input  logic [EW-1:0] energy,
  input  logic [7:0]    thr,
  input  logic [EW-1:0] emin,
  output logic          out_valid,
  output logic [MW-1:0] metric,
  output logic          flag,
  output cplx_t         x_out [NANT]
);
  localparam int CW = 28;
  logic signed [CW-1:0] c_re [NANT];
  logic signed [CW-1:0] c_im [NANT];
  logic [MW-1:0] m;

  for (genvar a = 0; a < NANT; a++) begin : g_ant
    golay_egc #(.NST(PRE_LOG), .OSR(OSR), .CW(CW)) u_egc (
      .clk, .rst, .valid, .din(din[a]), .corr_re(c_re[a]), .corr_im(c_im[a])
    );
  end

  function automatic logic [CW-1:0] absc(input logic signed [CW-1:0] v);
    return v[CW-1] ? CW'(-v) : CW'(v);
  endfunction

  always_comb begin
    m = '0;
    for (int a = 0; a < NANT; a++) m += MW'(absc(c_re[a])) + MW'(absc(c_im[a]));
  end

  logic [MW+8:0] lhs, rhs;
  assign lhs = (MW+9)'(m) << 7;
  assign rhs = (MW+9)'(thr) * (MW+9)'(energy);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; metric <= '0; flag <= 1'b0;
      x_out <= '{default: '0};
    end else begin
      out_valid <= valid;
      if (valid) begin
        metric <= m;
        flag   <= (lhs >= rhs) && (energy >= emin);
        x_out  <= din;
      end
    end
  end
endmodule
